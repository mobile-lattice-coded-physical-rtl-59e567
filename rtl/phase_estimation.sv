// phase_estimation: per-subcarrier uplink channel phase of each end node at
// the relay, measured on the node's postamble LTS.
//
// Chain (dashed box of the relay receiver diagram): the 64-sample LTS body is
// taken from a 65-entry sample history on the postamble label, fed to a
// forward FFT, each bin is divided by the known LTS value (+-1, so a sign
// change; bins outside k' = -26..26 and DC are set to zero), a vectoring
// CORDIC gives angle(.) and magnitude, and the results go to a phase buffer
// of 2 nodes x 64 bins. "Output select" is a read port addressed by node and
// bin, plus the two phases the relay feeds back each slot (k' = -26, +26),
// presented with fb_valid once all 64 bins of a node are written.
//
// Timing: label -> 64 clocks FFT load -> 192 butterfly clocks -> 64 bins out,
// 18 clocks CORDIC -> phase buffer; about 340 clocks (2.1 us at 160 MHz) per
// node. read port: rd_phase/rd_mag are registered, one clock after rd_*.
// Units: phase in turns (2**16 == 1 turn); magnitude in FFT output units
// scaled down by MAG_SHIFT.
//
// Follows the paper: FFT, division by LTS, angle, phase buffer, output
// select by end-node indicator, estimation on the postamble. Own choices:
// sequential FFT, CORDIC for angle(.), magnitude kept as a by-product; the
// LTS symbol is not CFO-derotated before the FFT (a common phase for all
// subcarriers, which the fed-back pair of phases carries to the node).
module phase_estimation
  import pnc_pkg::*;
#(
  parameter int unsigned MAG_SHIFT = 6
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        smp_valid,
  input  cplx_t       rx,
  input  logic        peak_valid,
  input  logic        post_ind,
  input  node_e       node_ind,
  // output select / read port
  input  node_e       rd_node,
  input  logic [5:0]  rd_bin,
  output phase_t      rd_phase,
  output logic [15:0] rd_mag,
  // fed-back pair
  output logic        fb_valid,
  output node_e       fb_node,
  output phase_t      fb_ph_k1,    // k' = -26
  output phase_t      fb_ph_k2     // k' = +26
);
  cplx_t hist [65];
  cplx_t snap [64];
  phase_t ph_buf [2][64];
  logic [15:0] mag_buf [2][64];

  logic       feeding;
  logic [5:0] fcnt;
  node_e      nd;
  logic       f_ready, f_ov;
  logic [5:0] f_idx;
  logic signed [22:0] f_re, f_im;
  cplx_t      fin;
  always_comb fin = snap[fcnt];

  fft64 #(.DW(16), .INVERSE(1'b0), .CP(0)) u_fft (
    .clk, .rst_n, .in_valid(feeding), .in_re(fin.re), .in_im(fin.im),
    .in_ready(f_ready), .out_valid(f_ov), .out_idx(f_idx), .out_re(f_re), .out_im(f_im));

  // divide by LTS (+-1 / 0)
  logic signed [22:0] h_re, h_im;
  always_comb begin
    int l;
    l = lts_freq(kprime(int'(f_idx)));
    if (l > 0)      begin h_re = f_re;  h_im = f_im;  end
    else if (l < 0) begin h_re = -f_re; h_im = -f_im; end
    else            begin h_re = '0;    h_im = '0;    end
  end

  logic        c_ov;
  logic signed [23:0] c_x, c_y;
  phase_t      c_z;
  logic [5:0]  c_tag;
  cordic #(.W(23), .ITER(15), .VECTOR(1'b1), .TAG_W(6)) u_angle (
    .clk, .rst_n, .in_valid(f_ov), .x_i(h_re), .y_i(h_im), .z_i('0), .tag_i(f_idx),
    .out_valid(c_ov), .x_o(c_x), .y_o(c_y), .z_o(c_z), .tag_o(c_tag));

  logic signed [23:0] mag_s;
  always_comb mag_s = c_x >>> MAG_SHIFT;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < 65; k++) hist[k] <= '0;
      for (int k = 0; k < 64; k++) begin
        snap[k] <= '0;
        ph_buf[0][k] <= '0; ph_buf[1][k] <= '0; mag_buf[0][k] <= '0; mag_buf[1][k] <= '0;
      end
      feeding <= 1'b0; fcnt <= '0; nd <= NODE_A;
      fb_valid <= 1'b0; fb_node <= NODE_A; fb_ph_k1 <= '0; fb_ph_k2 <= '0;
      rd_phase <= '0; rd_mag <= '0;
    end else begin
      fb_valid <= 1'b0;
      if (smp_valid) begin
        hist[0] <= rx;
        for (int k = 1; k < 65; k++) hist[k] <= hist[k-1];
      end
      if (peak_valid && post_ind && !feeding && f_ready) begin
        for (int k = 0; k < 64; k++) snap[k] <= hist[64-k];
        nd <= node_ind;
        feeding <= 1'b1; fcnt <= '0;
      end else if (feeding) begin
        fcnt <= fcnt + 1'b1;
        if (fcnt == 6'd63) feeding <= 1'b0;
      end
      if (c_ov) begin
        ph_buf[nd][c_tag]  <= (lts_freq(kprime(int'(c_tag))) == 0) ? '0 : c_z;
        mag_buf[nd][c_tag] <= (mag_s > 24'sd65535) ? 16'hffff : mag_s[15:0];
        if (c_tag == 6'd63) begin
          fb_valid <= 1'b1;
          fb_node  <= nd;
          fb_ph_k1 <= ph_buf[nd][bin_of(KP_FB1)];
          fb_ph_k2 <= ph_buf[nd][bin_of(KP_FB2)];
        end
      end
      rd_phase <= ph_buf[rd_node][rd_bin];
      rd_mag   <= mag_buf[rd_node][rd_bin];
    end
  end
endmodule
