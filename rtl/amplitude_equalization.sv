// amplitude_equalization: amplitude precoding factor of every subcarrier.
//
// Reciprocity: after an initial calibration factor rho_k per subcarrier,
// rho_k * |H_dn,k| is proportional to the uplink amplitude |H_up,k|, so
//   A_k = g / (rho_k * |H_dn,k|)
// equalises all uplink subcarriers to the same received amplitude. The
// overall gain g balances the two nodes' powers at the relay: each feedback
// carries a scaling factor s and g <- g * s (g starts at 1.0).
// Tables rho (rho_*) and downlink amplitudes (dn_*) are written from outside
// (calibration and the node's downlink receiver). On every feedback, or on
// `recompute`, the 52 used subcarriers are recomputed one after another with
// a serial divider (about 31 clocks each, 1.6k clocks in total); busy is high
// meanwhile. rd_k -> rd_amp is a registered read (one clock).
// Format: rho, |H_dn|, s, g and A_k are Q4.12 (4096 == 1.0).
// Follows the paper: reciprocity-based per-subcarrier amplitudes and one
// fed-back overall amplitude factor. Own choices: formats, sequential divide.
module amplitude_equalization
  import pnc_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        rho_we,
  input  logic [5:0]  rho_k,
  input  logic [15:0] rho_val,
  input  logic        dn_we,
  input  logic [5:0]  dn_k,
  input  logic [15:0] dn_val,
  input  logic        fb_valid,
  input  logic [15:0] fb_scale,
  input  logic        recompute,
  input  logic [5:0]  rd_k,
  output logic [15:0] rd_amp,
  output logic        busy,
  output logic [15:0] gain
);
  logic [15:0] rho [64];
  logic [15:0] dna [64];
  logic [15:0] amp [64];
  logic [5:0]  k;
  logic        d_start, d_busy, d_done, wait_div;
  logic [27:0] d_q;
  logic [31:0] den32;
  logic [15:0] den;
  logic [31:0] g_new;

  always_comb begin
    den32 = 32'(rho[k]) * 32'(dna[k]);
    den   = (den32[31:28] != 0) ? 16'hffff : den32[27:12];
    g_new = (32'(gain) * 32'(fb_scale)) >> 12;
  end

  serial_divider #(.NW(28), .DW(16)) u_div (
    .clk, .rst_n, .start(d_start), .num({gain, 12'd0}), .den(den),
    .busy(d_busy), .done(d_done), .quot(d_q));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 64; i++) begin rho[i] <= 16'h1000; dna[i] <= 16'h1000; amp[i] <= 16'h1000; end
      k <= '0; busy <= 1'b0; d_start <= 1'b0; wait_div <= 1'b0; gain <= 16'h1000; rd_amp <= '0;
    end else begin
      d_start <= 1'b0;
      if (rho_we) rho[rho_k] <= rho_val;
      if (dn_we)  dna[dn_k]  <= dn_val;
      if (!busy && (fb_valid || recompute)) begin
        if (fb_valid) gain <= (g_new > 32'hffff) ? 16'hffff : g_new[15:0];
        busy <= 1'b1; k <= '0; wait_div <= 1'b0;
      end else if (busy) begin
        if (!wait_div) begin
          if (is_used(kprime(int'(k)))) begin
            d_start <= 1'b1; wait_div <= 1'b1;
          end else begin
            amp[k] <= '0;
            k <= k + 1'b1;
            if (k == 6'd63) busy <= 1'b0;
          end
        end else if (d_done) begin
          amp[k] <= (d_q > 28'hffff) ? 16'hffff : d_q[15:0];
          wait_div <= 1'b0;
          k <= k + 1'b1;
          if (k == 6'd63) busy <= 1'b0;
        end
      end
      rd_amp <= amp[rd_k];
    end
  end
endmodule
