// lattice_encoding_buffer: holds the lattice codewords of one uplink packet.
//
// The lattice encoder (LDLC encoding with hypercube shaping) runs ahead of
// the transmitter and writes the complex codeword symbols here: N_CW
// codewords of CW_LEN symbols each (5 x 960 in the source design, i.e. 100
// OFDM symbols of 48 data subcarriers). The subcarrier mapping reads them in
// order, symbol s of codeword c at address c*CW_LEN + s. A write port for
// the encoder and a registered read port (data one clock after the address)
// give a simple dual-port RAM. `filled` goes high after the write of the last
// address and low again when the last address has been read, which lets
// the encoder and the transmitter hand the buffer back and forth.
//
// Follows the paper: buffer of the packet's 5 codewords of n = 960 symbols.
// Own choices: 16-bit I/Q symbol format and the handshake.
module lattice_encoding_buffer
  import pnc_pkg::*;
#(
  parameter int unsigned DEPTH = N_CW * CW_LEN
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      wr_en,
  input  logic [$clog2(DEPTH)-1:0]  wr_addr,
  input  cplx_t                     wr_data,
  input  logic                      rd_en,
  input  logic [$clog2(DEPTH)-1:0]  rd_addr,
  output cplx_t                     rd_data,
  output logic                      filled
);
  cplx_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) filled <= 1'b0;
    else if (wr_en && wr_addr == $clog2(DEPTH)'(DEPTH - 1)) filled <= 1'b1;
    else if (rd_en && rd_addr == $clog2(DEPTH)'(DEPTH - 1)) filled <= 1'b0;
  end
endmodule
