// time_slotted_scheduler: the end node's slot timer.
//
// A beacon from the relay (initialisation) starts the timer; from then on it
// counts sample ticks (the DAC sample clock enable) and emits start_tx at the
// first tick of every slot of SLOT samples. A request from the relay to
// advance by `amt` samples is held until the next slot starts and then makes
// that slot `amt` samples shorter, so all later slot boundaries move
// earlier by `amt`. At the moment the shortened slot ends, adj_pulse/adj_done
// tell the frequency-domain precoding how many samples were advanced (the
// phase adjustment compensates exactly this).
//
// Timing: start_tx is a one-clock pulse on the clock of the tick that begins
// a slot; the first one comes with the first tick after the beacon.
// Follows the paper: 1 ms slots, timer started by a beacon, timer advanced
// when the relay asks, driven by the same clock (tick) as the DAC. Own
// choices: a request is applied in the following slot; only advances.
module time_slotted_scheduler
  import pnc_pkg::*;
#(
  parameter int unsigned SLOT = SLOT_LEN
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        smp_tick,
  input  logic        beacon,
  input  logic        adj_req,
  input  logic [3:0]  adj_amt,
  output logic        start_tx,
  output logic        adj_pulse,     // advance applied
  output logic [3:0]  adj_done,      // samples advanced
  output logic        running,
  output logic [31:0] slot_idx
);
  logic [31:0] cnt, last;
  logic [3:0]  pend, cur;
  logic        armed;

  always_comb last = 32'(SLOT) - 32'(cur) - 1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '0; pend <= '0; cur <= '0; running <= 1'b0; armed <= 1'b0;
      start_tx <= 1'b0; adj_pulse <= 1'b0; adj_done <= '0; slot_idx <= '0;
    end else begin
      start_tx  <= 1'b0;
      adj_pulse <= 1'b0;
      if (adj_req) pend <= adj_amt;
      if (beacon) begin
        running <= 1'b1; armed <= 1'b1; cnt <= '0; cur <= '0; slot_idx <= '0;
      end else if (running && smp_tick) begin
        if (armed || cnt == last) begin
          // first tick of a slot
          armed    <= 1'b0;
          cnt      <= '0;
          start_tx <= 1'b1;
          if (!armed) slot_idx <= slot_idx + 1;
          if (cur != 0 && !armed) begin
            adj_pulse <= 1'b1; adj_done <= cur;
          end
          // a pending request shortens the slot that starts now
          cur  <= adj_req ? adj_amt : pend;
          pend <= '0;
        end else begin
          cnt <= cnt + 1;
        end
      end
    end
  end
endmodule
