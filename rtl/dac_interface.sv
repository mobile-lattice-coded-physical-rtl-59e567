// dac_interface: hands the transmit samples to the DAC.
//
// On every sample tick (the DAC sample clock enable, which also drives the
// slot timer) the 16-bit I/Q sample is rounded to DAC_W bits with
// saturation and registered onto the DAC pins; outside packets the pins
// carry zero and tx_en (the RF transmit enable) is low.
// Follows the paper: a separate interface to the DAC driven by the DAC
// clock. Own choices: DAC_W = 12 and the rounding.
module dac_interface
  import pnc_pkg::*;
#(
  parameter int unsigned DAC_W = 12
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    smp_tick,
  input  logic                    tx_valid,
  input  cplx_t                   tx_sample,
  output logic signed [DAC_W-1:0] dac_i,
  output logic signed [DAC_W-1:0] dac_q,
  output logic                    tx_en
);
  localparam int unsigned SH = SW - DAC_W;
  localparam int signed   MAXV = (1 <<< (DAC_W - 1)) - 1;
  localparam int signed   MINV = -(1 <<< (DAC_W - 1));

  function automatic logic signed [DAC_W-1:0] conv(input logic signed [SW-1:0] v);
    int r;
    r = (int'(v) + (1 <<< (SH - 1))) >>> SH;
    if (r > MAXV) r = MAXV;
    if (r < MINV) r = MINV;
    return DAC_W'(r);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dac_i <= '0; dac_q <= '0; tx_en <= 1'b0;
    end else if (smp_tick) begin
      tx_en <= tx_valid;
      dac_i <= tx_valid ? conv(tx_sample.re) : '0;
      dac_q <= tx_valid ? conv(tx_sample.im) : '0;
    end
  end
endmodule
