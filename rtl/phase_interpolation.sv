// phase_interpolation: rebuilds the uplink phase of every subcarrier at the
// end node from the two phases the relay feeds back (reciprocity-based phase
// precoding of the source design).
//
// Model (per subcarrier k, shifted index k'):
//   up(t2) = up(t1) - dn(t1) + dn(t2) + 2*eta(k),   2*eta(k) = c0 + c1*k'
// up(t1) - dn(t1) is measured once at the initial calibration (table cal,
// written through cal_*), dn(t2) is the latest downlink phase from the
// node's own receiver (table dn, written through dn_*). On every feedback
// the relay sends up(t2) for k' = -26 and +26 only; from them
//   e1 = fb1 - cal - dn - ramp  (k' = -26),  e2 likewise (k' = +26)
// where ramp = k*D/64 turn removes the known effect of the node's own slot
// advances (D = d_fb, accumulated advance of the packet the relay measured).
// The slope term d = e2 - e1 is only known modulo a turn; it is unwrapped
// against a prediction, d = pred + wrap(d_meas - pred), with pred = the
// previous d plus the SFO drift of one slot (2*eps*SLOT*52/64 turn, where
// eps = cfo * FS_OVER_FC is the relative clock offset shared by carrier and
// sampling clocks). Then 2*eta(k) = e1 + d*(k'+26)/52 and the block returns
// the precoding contribution -up(t2) for the bin asked on rd_k, one clock
// later (zero on unused bins).
//
// Timing: a feedback is absorbed in 2 clocks (fb_valid -> ready).
// Units: phases in turns, 2**16 == 1 turn; cfo 2**32 == 1 turn/sample.
// Follows the paper: equations for up/dn phase, linearity of eta in k',
// feedback at k' = -26/+26, unwrapping against a CFO/SFO prediction,
// tracking of integer sample adjustments. Own choices: fixed-point formats,
// deriving the SFO from the CFO via FS_OVER_FC, and 1/52 as a constant
// multiply.
module phase_interpolation
  import pnc_pkg::*;
#(
  parameter int unsigned SLOT       = SLOT_LEN,
  parameter int unsigned FS_FC_Q20  = 8389      // (20 MHz / 2.5 GHz) * 2**20
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cal_we,
  input  logic [5:0]  cal_k,
  input  phase_t      cal_val,
  input  logic        dn_we,
  input  logic [5:0]  dn_k,
  input  phase_t      dn_val,
  input  logic        fb_valid,
  input  phase_t      fb_k1,       // k' = -26
  input  phase_t      fb_k2,       // k' = +26
  input  logic [5:0]  d_fb,
  input  cfo_t        cfo,
  input  logic [5:0]  rd_k,
  output phase_t      rd_phase,
  output logic        wrap_fix,    // pulse: unwrapping changed the slope
  output logic signed [31:0] slope // d, turns * 2**16
);
  localparam int B1 = 38;  // bin of k' = -26
  localparam int B2 = 26;  // bin of k' = +26

  phase_t cal [64];
  phase_t dn  [64];
  phase_t e1;
  logic signed [31:0] d_prev;
  logic        stage2;
  phase_t      e2_q;

  // predicted change of the slope over one slot
  logic signed [63:0] p1, p2, p3;
  logic signed [31:0] pred;
  always_comb begin
    p1   = 64'(cfo) * 64'(SLOT);
    p2   = (p1 * 64'(FS_FC_Q20)) >>> 20;
    p3   = (p2 * 64'sd104) >>> 6;
    pred = d_prev + 32'(p3 >>> 16);
  end

  phase_t e1_c, e2_c, r1, r2;
  always_comb begin
    r1   = {6'(12'(B1) * 12'(d_fb)), 10'd0};
    r2   = {6'(12'(B2) * 12'(d_fb)), 10'd0};
    e1_c = fb_k1 - cal[B1] - dn[B1] - r1;
    e2_c = fb_k2 - cal[B2] - dn[B2] - r2;
  end

  logic signed [15:0] dm;
  logic signed [31:0] d_new;
  always_comb begin
    dm    = $signed(e2_q - e1) - $signed(pred[15:0]);
    d_new = pred + 32'(dm);
  end

  // read side
  int kp;
  logic signed [63:0] interp;
  phase_t up;
  always_comb begin
    kp     = kprime(int'(rd_k));
    interp = (64'(slope) * 64'(kp + 26) * 64'sd20165) >>> 20;
    up     = cal[rd_k] + dn[rd_k] + e1 + interp[15:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < 64; k++) begin cal[k] <= '0; dn[k] <= '0; end
      e1 <= '0; e2_q <= '0; d_prev <= '0; slope <= '0; stage2 <= 1'b0;
      rd_phase <= '0; wrap_fix <= 1'b0;
    end else begin
      wrap_fix <= 1'b0;
      if (cal_we) cal[cal_k] <= cal_val;
      if (dn_we)  dn[dn_k]   <= dn_val;
      stage2 <= fb_valid;
      if (fb_valid) begin
        e1   <= e1_c;
        e2_q <= e2_c;
      end
      if (stage2) begin
        slope    <= d_new;
        d_prev   <= d_new;
        wrap_fix <= (d_new != 32'($signed(e2_q - e1)));
      end
      rd_phase <= is_used(kp) ? -up : '0;
    end
  end
endmodule
