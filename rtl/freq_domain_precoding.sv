// freq_domain_precoding: multiplies every frequency-domain value X_k of the
// end node's data symbols by its precoding factor A_k * exp(j*theta_k).
//
// theta_k = phase interpolation (reciprocity phase from the two fed-back
// phases, calibration and downlink phases) + SFO precoding (SFO phase ramp
// of symbol `sym`) + CFO phase drift (CFO rotation between the relay's
// measurement and this packet's data) + phase adjustment (ramp caused by the
// node's own slot advances). A_k comes from amplitude equalization. The
// five blocks are instantiated here; A_k*exp(j*theta_k) is formed by a
// rotating CORDIC applied to (A_k, 0), then a complex multiply (Q4.12
// factor) with saturation to 16 bits.
// Feedback (fb_valid, fb) updates phase interpolation, the stored CFO and the
// amplitude gain; it must arrive before the next start_tx (it does: the
// relay answers within a few microseconds of the postamble).
// Timing: in_* -> out_* takes 19 clocks, one value per clock, no stalls.
// cfo_o is the CFO of the last feedback (for the time-domain precoding).
//
// Follows the paper: the structure of the frequency-domain precoding box
// (five parts, A*e^{j*theta} times the data). Own choices: the formats,
// the summation of four phases into one rotation.
module freq_domain_precoding
  import pnc_pkg::*;
#(
  parameter int unsigned SLOT      = SLOT_LEN,
  parameter int unsigned FS_FC_Q20 = 8389
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        smp_tick,
  input  logic        start_tx,
  input  logic        post_tx,
  input  logic        adj_pulse,
  input  logic [3:0]  adj_amt,
  // calibration / downlink tables
  input  logic        cal_we,
  input  logic [5:0]  cal_k,
  input  phase_t      cal_val,
  input  logic        dnph_we,
  input  logic [5:0]  dnph_k,
  input  phase_t      dnph_val,
  input  logic        rho_we,
  input  logic [5:0]  rho_k,
  input  logic [15:0] rho_val,
  input  logic        dnamp_we,
  input  logic [5:0]  dnamp_k,
  input  logic [15:0] dnamp_val,
  // feedback from the relay
  input  logic        fb_valid,
  input  feedback_t   fb,
  // symbol stream
  input  logic        in_valid,
  input  logic [5:0]  in_k,
  input  logic [6:0]  in_sym,
  input  logic        in_first,
  input  logic        in_last,
  input  cplx_t       in_data,
  output logic        out_valid,
  output logic [5:0]  out_k,
  output logic        out_first,
  output logic        out_last,
  output cplx_t       out_data,
  output cfo_t        cfo_o,
  output logic        wrap_fix,
  output logic        amp_busy,
  output logic [15:0] amp_gain,
  output logic [5:0]  d_total
);
  phase_t ph_int, ph_sfo, ph_cfo, ph_adj;
  logic [15:0] amp;
  logic [23:0] dt;
  logic [5:0]  d_sent;
  logic signed [31:0] slope;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        cfo_o <= '0;
    else if (fb_valid) cfo_o <= fb.cfo;
  end

  phase_interpolation #(.SLOT(SLOT), .FS_FC_Q20(FS_FC_Q20)) u_interp (
    .clk, .rst_n, .cal_we, .cal_k, .cal_val, .dn_we(dnph_we), .dn_k(dnph_k), .dn_val(dnph_val),
    .fb_valid, .fb_k1(fb.ph_k1), .fb_k2(fb.ph_k2), .d_fb(6'd0), .cfo(fb.cfo),
    .rd_k(in_k), .rd_phase(ph_int), .wrap_fix, .slope);

  sfo_precoding #(.FS_FC_Q20(FS_FC_Q20)) u_sfo (
    .clk, .rst_n, .cfo(cfo_o), .dt, .sym(in_sym), .k(in_k), .phase(ph_sfo));

  cfo_phase_drift u_drift (
    .clk, .rst_n, .smp_tick, .post_tx, .start_tx, .cfo(cfo_o), .phase(ph_cfo), .dt);

  phase_adjustment u_adj (
    .clk, .rst_n, .adj_pulse, .adj_amt, .start_tx, .fb_valid, .fb_off(fb.off), .k(in_k), .phase(ph_adj),
    .d_total, .d_sent);

  amplitude_equalization u_amp (
    .clk, .rst_n, .rho_we, .rho_k, .rho_val, .dn_we(dnamp_we), .dn_k(dnamp_k), .dn_val(dnamp_val),
    .fb_valid, .fb_scale(fb.amp), .recompute(1'b0), .rd_k(in_k), .rd_amp(amp),
    .busy(amp_busy), .gain(amp_gain));

  // stage 1: tables answered, sum the phases
  logic        v1, f1, l1;
  logic [5:0]  k1;
  cplx_t       d1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin v1 <= 1'b0; f1 <= 1'b0; l1 <= 1'b0; k1 <= '0; d1 <= '0; end
    else begin v1 <= in_valid; f1 <= in_first; l1 <= in_last; k1 <= in_k; d1 <= in_data; end
  end
  phase_t theta;
  always_comb theta = ph_int + ph_sfo + ph_cfo + ph_adj;

  // stage 2..18: A*exp(j*theta)
  logic        c_ov;
  logic signed [18:0] c_x, c_y;
  phase_t      c_z;
  logic [39:0] c_tag;
  cordic #(.W(18), .ITER(15), .VECTOR(1'b0), .TAG_W(40)) u_rot (
    .clk, .rst_n, .in_valid(v1), .x_i({2'b00, amp}), .y_i('0), .z_i(theta),
    .tag_i({f1, l1, k1, d1}), .out_valid(c_ov), .x_o(c_x), .y_o(c_y), .z_o(c_z), .tag_o(c_tag));

  // stage 19: complex multiply
  cplx_t dd;
  logic signed [47:0] pr, pi;
  always_comb begin
    dd = c_tag[31:0];
    pr = (48'(dd.re) * 48'(c_x) - 48'(dd.im) * 48'(c_y)) >>> 12;
    pi = (48'(dd.re) * 48'(c_y) + 48'(dd.im) * 48'(c_x)) >>> 12;
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_k <= '0; out_first <= 1'b0; out_last <= 1'b0; out_data <= '0;
    end else begin
      out_valid <= c_ov;
      out_first <= c_ov && c_tag[39];
      out_last  <= c_ov && c_tag[38];
      out_k     <= c_tag[37:32];
      out_data  <= '{re: sat16(pr), im: sat16(pi)};
    end
  end
endmodule
