// cfo_estimation: preamble-postamble CFO estimator of the relay, per end node.
//
//   CFO = (1/dN) * angle( sum_i conj(lts1[i]) * lts2[i] )     (64 terms)
// where lts1 is the node's preamble LTS body, lts2 its postamble LTS body and
// dN their distance in samples (8160 in the default packet). Because the
// data between them is long, the angle can exceed a turn; only its
// fractional part is measured, and the whole turns are recovered from a rough
// CFO given by the initialisation phase:
//   pred  = rough_cfo * dN                      (turns, unwrapped)
//   total = pred + wrap(angle - pred)           (wrap to [-1/2, 1/2) turn)
//   cfo   = total / dN
//
// How: a 65-entry history shifted by every sample strobe; on a preamble
// label from lts_correlation the LTS body (history 1..64) is copied to the
// node's preamble buffer with its time stamp; on a postamble label it is
// copied to a postamble buffer and 64 complex multiply-accumulates follow
// (one per clock), then a vectoring CORDIC (angle) and a 48-bit serial
// division. A result takes about 64 + 19 + 50 clocks after the label; the
// relay must not present another postamble label within that time.
//
// Units: angle in turns (2**16 == 1 turn); rough_cfo and cfo in turns per
// sample, 2**32 == 1 turn/sample. Follows the paper: equation (3), the use of
// a rough CFO to recover whole rotations. Own choices: fixed-point formats
// and the sequential datapath.
module cfo_estimation
  import pnc_pkg::*;
#(
  parameter int unsigned ACC_SHIFT = 14    // correlation scaling before CORDIC
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        smp_valid,
  input  cplx_t       rx,
  input  logic        peak_valid,
  input  logic        pre_ind,
  input  logic        post_ind,
  input  node_e       node_ind,
  input  logic [31:0] peak_time,
  input  cfo_t        rough_cfo_a,
  input  cfo_t        rough_cfo_b,
  output logic        cfo_valid,
  output node_e       cfo_node,
  output cfo_t        cfo,
  output phase_t      frac_angle,  // measured fractional rotation
  output logic signed [15:0] turns // whole rotations that were added
);
  cplx_t hist [65];                // hist[0] newest
  cplx_t pre_buf [2][64];
  cplx_t post_buf [64];
  logic [31:0] t_pre [2];

  typedef enum logic [2:0] {S_IDLE, S_MAC, S_CORDIC, S_DIV} st_e;
  st_e st;
  logic [6:0]  i;
  node_e       nd;
  logic [31:0] dn;
  logic signed [39:0] acc_re, acc_im;

  // MAC term conj(pre) * post
  cplx_t a, b;
  logic signed [32:0] p_re, p_im;
  always_comb begin
    a = pre_buf[nd][i[5:0]];
    b = post_buf[i[5:0]];
    p_re = 33'(a.re * b.re) + 33'(a.im * b.im);
    p_im = 33'(a.re * b.im) - 33'(a.im * b.re);
  end

  // CORDIC
  logic        c_in, c_ov;
  logic signed [24:0] c_x, c_y;
  phase_t      c_z;
  logic [0:0]  c_tag;
  logic signed [39:0] acc_re_s, acc_im_s;
  always_comb begin
    acc_re_s = acc_re >>> ACC_SHIFT;
    acc_im_s = acc_im >>> ACC_SHIFT;
  end
  cordic #(.W(24), .ITER(15), .VECTOR(1'b1), .TAG_W(1)) u_angle (
    .clk, .rst_n, .in_valid(c_in),
    .x_i(acc_re_s[23:0]), .y_i(acc_im_s[23:0]), .z_i('0), .tag_i(1'b0),
    .out_valid(c_ov), .x_o(c_x), .y_o(c_y), .z_o(c_z), .tag_o(c_tag));

  // whole-rotation recovery
  cfo_t        rough;
  logic signed [63:0] pred64;
  logic signed [31:0] pred;     // turns, 2**16 == 1
  logic signed [15:0] ferr;
  logic signed [31:0] total;
  always_comb begin
    rough  = (nd == NODE_A) ? rough_cfo_a : rough_cfo_b;
    pred64 = 64'(rough) * $signed({32'd0, dn});
    pred   = 32'(pred64 >>> 16);
    ferr   = $signed(c_z - pred[15:0]);
    total  = pred + 32'(ferr);
  end

  logic        d_start, d_busy, d_done;
  logic [47:0] d_num, d_q;
  logic        neg;
  serial_divider #(.NW(48), .DW(16)) u_div (
    .clk, .rst_n, .start(d_start), .num(d_num), .den(dn[15:0]),
    .busy(d_busy), .done(d_done), .quot(d_q));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < 65; k++) hist[k] <= '0;
      for (int k = 0; k < 64; k++) begin pre_buf[0][k] <= '0; pre_buf[1][k] <= '0; post_buf[k] <= '0; end
      t_pre[0] <= '0; t_pre[1] <= '0;
      st <= S_IDLE; i <= '0; nd <= NODE_A; dn <= '0; acc_re <= '0; acc_im <= '0;
      c_in <= 1'b0; d_start <= 1'b0; d_num <= '0; neg <= 1'b0;
      cfo_valid <= 1'b0; cfo_node <= NODE_A; cfo <= '0; frac_angle <= '0; turns <= '0;
    end else begin
      c_in <= 1'b0; d_start <= 1'b0; cfo_valid <= 1'b0;
      if (smp_valid) begin
        hist[0] <= rx;
        for (int k = 1; k < 65; k++) hist[k] <= hist[k-1];
      end
      if (peak_valid && pre_ind) begin
        for (int k = 0; k < 64; k++) pre_buf[node_ind][k] <= hist[64-k];
        t_pre[node_ind] <= peak_time;
      end
      unique case (st)
        S_IDLE: if (peak_valid && post_ind) begin
          for (int k = 0; k < 64; k++) post_buf[k] <= hist[64-k];
          nd <= node_ind;
          dn <= peak_time - t_pre[node_ind];
          acc_re <= '0; acc_im <= '0; i <= '0;
          st <= S_MAC;
        end
        S_MAC: begin
          acc_re <= acc_re + 40'(p_re);
          acc_im <= acc_im + 40'(p_im);
          i <= i + 1'b1;
          if (i == 7'd63) begin st <= S_CORDIC; c_in <= 1'b1; end
        end
        S_CORDIC: if (c_ov) begin
          frac_angle <= c_z;
          turns      <= 16'((total + 32'sh8000) >>> 16);
          neg        <= total[31];
          d_num      <= total[31] ? 48'(-total) << 16 : 48'(total) << 16;
          d_start    <= 1'b1;
          st         <= S_DIV;
        end
        S_DIV: if (d_done) begin
          cfo       <= neg ? -cfo_t'(d_q) : cfo_t'(d_q);
          cfo_node  <= nd;
          cfo_valid <= 1'b1;
          st        <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
