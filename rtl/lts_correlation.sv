// lts_correlation: finds the long training sequences (LTS) of a PNC uplink
// packet at the relay and labels them.
//
// Each received sample (strobe smp_valid) is pushed into a 64-deep window and
// cross-correlated with the conjugate of the known 64-sample LTS body,
// quantised to the signs of its I and Q parts (so the correlator needs only
// adders). The metric is |Re| + |Im| of the correlation. A peak is a metric
// sample that reaches `threshold`, is larger than its predecessor and not
// smaller than its successor; peaks closer than HOLDOFF samples to the last
// one are ignored. A PNC packet yields four peaks, in this order (paper,
// time-slot synchronisation section): end of node A's preamble LTS, end of
// node B's preamble LTS, end of A's postamble LTS, end of B's postamble LTS.
// A peak counter labels them; it restarts when no peak arrives for TIMEOUT
// samples.
//
// Timing: the label pulse (peak_valid with pre_ind/post_ind/node_ind and the
// sample time stamp of the peak) comes one clock after the strobe of the
// sample that follows the peak sample. At that clock a 65-deep history that
// was shifted by the same strobes holds the LTS body in entries 1..64
// (entry 64 oldest), which is how cfo_estimation and phase_estimation pick it.
//
// Follows the paper: correlation with the known LTS, 4 peaks per packet and
// their meaning. Own choices: sign-quantised reference, L1 metric, the peak
// rule, HOLDOFF/TIMEOUT, and a programmable threshold.
module lts_correlation
  import pnc_pkg::*;
#(
  parameter int unsigned HOLDOFF = 40,
  parameter int unsigned TIMEOUT = DATA_LEN + 2 * LTS_LEN + 256
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        smp_valid,
  input  cplx_t       rx,
  input  logic [23:0] threshold,
  output logic        peak_valid,
  output logic        pre_ind,     // preamble indicator
  output logic        post_ind,    // postamble indicator
  output node_e       node_ind,    // end node indicator
  output logic [31:0] peak_time,   // sample index of the last LTS sample
  output logic [31:0] smp_time     // running sample counter
);
  cplx_t win [64];                 // win[63] newest
  logic signed [23:0] c_re, c_im;
  logic [23:0] metric, m1, m2;
  logic [31:0] since_peak;
  logic [1:0]  pk_cnt;
  logic [31:0] gap;

  // sign-quantised conj(LTS) correlation over the window incl. the new sample
  always_comb begin
    logic signed [23:0] sr, si;
    cplx_t r, x;
    sr = '0; si = '0;
    for (int i = 0; i < 64; i++) begin
      r = lts_td(i);
      x = (i == 63) ? rx : win[i+1];
      // x * conj(sgn(r)) with sgn in {+1,-1}
      if (!r.re[SW-1]) begin sr = sr + 24'(x.re); si = si + 24'(x.im); end
      else             begin sr = sr - 24'(x.re); si = si - 24'(x.im); end
      if (!r.im[SW-1]) begin sr = sr + 24'(x.im); si = si - 24'(x.re); end
      else             begin sr = sr - 24'(x.im); si = si + 24'(x.re); end
    end
    c_re = sr; c_im = si;
    metric = (c_re[23] ? -c_re : c_re) + (c_im[23] ? -c_im : c_im);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 64; i++) win[i] <= '0;
      m1 <= '0; m2 <= '0; since_peak <= 32'hffff_ffff; pk_cnt <= '0; gap <= '0;
      peak_valid <= 1'b0; pre_ind <= 1'b0; post_ind <= 1'b0; node_ind <= NODE_A;
      peak_time <= '0; smp_time <= '0;
    end else begin
      peak_valid <= 1'b0;
      if (smp_valid) begin
        for (int i = 0; i < 63; i++) win[i] <= win[i+1];
        win[63]  <= rx;
        m2       <= m1;
        m1       <= metric;
        smp_time <= smp_time + 1;
        if (since_peak != 32'hffff_ffff) since_peak <= since_peak + 1;
        if (gap < TIMEOUT) gap <= gap + 1;
        else               pk_cnt <= '0;
        // m1 belongs to sample smp_time-1, metric to smp_time
        if (m1 >= threshold && m1 > m2 && m1 >= metric && since_peak >= HOLDOFF) begin
          peak_valid <= 1'b1;
          peak_time  <= smp_time - 1;
          pre_ind    <= ~pk_cnt[1] || (gap >= TIMEOUT);
          post_ind   <=  pk_cnt[1] && (gap <  TIMEOUT);
          node_ind   <= ((gap >= TIMEOUT) ? 1'b0 : pk_cnt[0]) ? NODE_B : NODE_A;
          pk_cnt     <= (gap >= TIMEOUT) ? 2'd1 : pk_cnt + 1'b1;
          since_peak <= 32'd0;
          gap        <= '0;
        end
      end
    end
  end
endmodule
