// phase_adjustment: phase ramp that compensates the end node's time-slot
// advances (equation (5) of the source design).
//
// Advancing the transmission by d samples rotates subcarrier k at the relay
// by +2*pi*k*d/N; multiplying subcarrier k by exp(-j*2*pi*k*d/N) undoes it.
// The block accumulates all advances since the initial calibration,
// D = sum of d (only D mod 64 matters), and for the bin k presented on its
// input returns, one clock later, phase = -(k*D mod 64)/64 turn
// (2**16 == 1 turn), which is exact in this format.
// The relay measures each node's phases on its own postamble in the node's
// own LTS timing, while it combines the two nodes in node A's timing. With
// the feedback of packet p (sent with advance total D_p = d_sent, arriving
// off = fb_off samples behind node A) the ramp for later packets is taken
// relative to base = D_p + off, i.e. phase = -(k*(D - base) mod 64)/64:
// the advances made since packet p are undone and the arrival offset that
// the relay saw is removed. d_sent is D as it was
// when the last packet started (latched on start_tx); the phase
// interpolation uses it to remove the known ramp from the relay's feedback.
module phase_adjustment
  import pnc_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        adj_pulse,
  input  logic [3:0]  adj_amt,
  input  logic        start_tx,
  input  logic        fb_valid,
  input  logic signed [7:0] fb_off,
  input  logic [5:0]  k,
  output phase_t      phase,
  output logic [5:0]  d_total,
  output logic [5:0]  d_sent
);
  logic [11:0] kd;
  logic [5:0]  base_q;
  always_comb kd = 12'(k) * 12'(d_total - base_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      d_total <= '0; d_sent <= '0; phase <= '0; base_q <= '0;
    end else begin
      if (fb_valid)  base_q  <= d_sent + fb_off[5:0];
      if (adj_pulse) d_total <= d_total + 6'(adj_amt);
      if (start_tx)  d_sent  <= adj_pulse ? d_total + 6'(adj_amt) : d_total;
      phase <= -{kd[5:0], 10'd0};
    end
  end
endmodule
