// sfo_precoding: per-subcarrier phase that compensates the sampling
// frequency offset (SFO) from the node's last postamble to the OFDM symbol
// being precoded.
//
// The relative clock offset eps is shared by carrier and sampling clocks
// (one TCXO drives both), so eps = CFO/fc and the CFO in turns per sample
// gives eps = cfo * fs/fc. After t samples the sampling instants have
// slipped by eps*t samples, which rotates subcarrier k' by eps*t*k'/64 turn.
// With t = dt + 80*sym (dt from cfo_phase_drift) the block returns
//   phase = -(cfo * t * FS_FC) * k' / 64      (2**16 == 1 turn)
// for the bin k and symbol sym on its inputs, registered (one clock).
// Follows the paper: SFO phase shift from the last postamble to the current
// OFDM symbol, linear in k'. Own choice: SFO derived from the CFO.
module sfo_precoding
  import pnc_pkg::*;
#(
  parameter int unsigned FS_FC_Q20 = 8389      // (20 MHz / 2.5 GHz) * 2**20
) (
  input  logic        clk,
  input  logic        rst_n,
  input  cfo_t        cfo,
  input  logic [23:0] dt,
  input  logic [6:0]  sym,
  input  logic [5:0]  k,
  output phase_t      phase
);
  logic signed [63:0] t, drift, ph;
  int kp;
  always_comb begin
    kp    = kprime(int'(k));
    t     = 64'(dt) + 64'(sym) * 64'(SYM_LEN);
    drift = ((64'(cfo) * t) * 64'(FS_FC_Q20)) >>> 20;   // samples * 2**32
    ph    = (drift * 64'(kp)) >>> 6;                     // turns * 2**32
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) phase <= '0;
    else        phase <= -ph[31:16];
  end
endmodule
