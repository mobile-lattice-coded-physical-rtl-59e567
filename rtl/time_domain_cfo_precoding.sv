// time_domain_cfo_precoding: removes the end node's CFO from its transmitted
// data samples in advance, x'[n] = x[n] * exp(-j*2*pi*cfo*n).
//
// An NCO accumulates the fed-back CFO (turns per sample, 2**32 == 1) once per
// sample, starting from zero at the first sample of the packet's data
// (in_first); its top 16 bits, negated, drive a rotating CORDIC. The
// 23-bit IFFT output is saturated to 16 bits first.
// Timing: 17 clocks from in_* to out_*; one sample per clock at most.
//
// Follows the paper: CFO precoding in the time domain after the IFFT, with
// the relay-estimated CFO. Own choices: NCO reference at the data start
// (the phase up to that point is handled by the CFO phase drift block).
module time_domain_cfo_precoding
  import pnc_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  cfo_t               cfo,
  input  logic               in_valid,
  input  logic               in_first,
  input  logic               in_last,
  input  logic signed [22:0] in_re,
  input  logic signed [22:0] in_im,
  output logic               out_valid,
  output logic               out_last,
  output cplx_t              out_data
);
  cfo_t acc, ang;
  always_comb ang = in_first ? '0 : acc;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        acc <= '0;
    else if (in_valid) acc <= ang + cfo;
  end

  logic        c_ov;
  logic signed [16:0] c_x, c_y;
  phase_t      c_z;
  logic [0:0]  c_tag;
  cordic #(.W(16), .ITER(15), .VECTOR(1'b0), .TAG_W(1)) u_rot (
    .clk, .rst_n, .in_valid, .x_i(sat16(48'(in_re))), .y_i(sat16(48'(in_im))),
    .z_i(-ang[31:16]), .tag_i(in_last), .out_valid(c_ov), .x_o(c_x), .y_o(c_y), .z_o(c_z),
    .tag_o(c_tag));

  always_comb begin
    out_valid = c_ov;
    out_last  = c_ov && c_tag[0];
    out_data  = '{re: sat16(48'(c_x)), im: sat16(48'(c_y))};
  end
endmodule
