// tb_time_slotted_scheduler: slot length 100 samples, one tick per 3 clocks.
// Checks that slots start every SLOT ticks after the beacon, that an advance
// request shortens the next slot by the requested samples (adj_pulse with
// the amount), and that unrequested slots keep their length.
`timescale 1ns/1ps
module tb_time_slotted_scheduler;
  import pnc_pkg::*;
  localparam int SLOT = 100;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic smp_tick, beacon, adj_req, start_tx, adj_pulse, running;
  logic [3:0] adj_amt, adj_done; logic [31:0] slot_idx;
  int checks = 0, failures = 0;
  time_slotted_scheduler #(.SLOT(SLOT)) dut (.*);
  int tick_n = 0, last_start = -1, want_len = SLOT, n_adj = 0, n_start = 0;
  bit pend = 0;
  logic [1:0] div;
  always @(posedge clk) begin
    if (!rst_n) div <= 0; else div <= (div == 2) ? 0 : div + 1;
  end
  assign smp_tick = rst_n && div == 0;
  always @(posedge clk) if (smp_tick) tick_n++;
  always @(posedge clk) if (rst_n) begin
    if (start_tx) begin
      n_start++;
      if (last_start >= 0) begin
        checks++;
        if (tick_n - last_start != want_len) begin failures++; $display("FAIL slot length %0d want %0d", tick_n - last_start, want_len); end
      end
      last_start = tick_n; want_len = pend ? SLOT - 2 : SLOT; pend = 0;
    end
    if (adj_pulse) begin n_adj++; checks++; if (adj_done != 4'd2) failures++; end
  end
  initial begin
    beacon = 0; adj_req = 0; adj_amt = 4'd2;
    repeat (3) @(negedge clk); rst_n = 1'b1;
    repeat (20) @(negedge clk); beacon = 1'b1; @(negedge clk); beacon = 1'b0;
    for (int s = 0; s < 20; s++) begin
      wait (n_start > s); @(negedge clk);
      if (s % 3 == 1) begin
        repeat (40) @(negedge clk);
        adj_req = 1'b1; @(negedge clk); adj_req = 1'b0;
        pend = 1;
      end
    end
    checks++; if (n_adj < 5) begin failures++; $display("FAIL only %0d advances", n_adj); end
    checks++; if (!running || n_start < 20) begin failures++; $display("FAIL running=%0b starts=%0d", running, n_start); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #2ms; $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
