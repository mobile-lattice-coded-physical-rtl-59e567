// cfo_phase_drift: common phase drift caused by the CFO between the node's
// last postamble and the data part of its next packet.
//
// A counter restarts on post_tx (first sample of the body of the node's own
// postamble LTS, where the relay measures the uplink phase) and counts
// sample ticks. On start_tx of the next packet the distance to the first
// data sample, dt = count + PRE_LEN, is latched, and the precoding term
//   phase = -(cfo * dt) mod 1 turn
// is formed (2**16 == 1 turn). dt is also given to the SFO precoding.
// Within the data part the drift is removed in the time domain
// (time_domain_cfo_precoding), which starts from zero at the first data sample.
//
// Timing: phase and dt are valid from the clock after start_tx until the
// next start_tx. Follows the paper: drift from the postamble of the last
// packet to the data of the current one. Own choice: the reference instants.
module cfo_phase_drift
  import pnc_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        smp_tick,
  input  logic        post_tx,
  input  logic        start_tx,
  input  cfo_t        cfo,
  output phase_t      phase,
  output logic [23:0] dt
);
  logic [23:0] cnt;
  logic signed [63:0] prod;
  always_comb prod = 64'(cfo) * $signed({40'd0, dt});

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '0; dt <= '0;
    end else begin
      if (post_tx)       cnt <= '0;
      else if (smp_tick && cnt != 24'hffffff) cnt <= cnt + 1;
      if (start_tx) dt <= cnt + 24'(PRE_LEN);
    end
  end
  assign phase = -prod[31:16];
endmodule
