// subcarrier_mapping: builds the 64 frequency-domain values of each data
// OFDM symbol of the end node's packet.
//
// On start_tx a packet of N_SYMS symbols begins. A symbol is emitted when the
// downstream path is free (`sym_done` of the previous symbol seen, IFFT ready)
// and the sample FIFO has room for it (fifo_space >= SYM_LEN); otherwise the
// mapper waits, and `stall` is high for every waiting clock. A symbol is 64
// consecutive beats in FFT bin order k = 0..63 (k' = k for k < 32, k - 64
// otherwise): data subcarriers take the next lattice symbol from the encoding
// buffer (address sym*48 + j, j counting the data subcarriers of the symbol
// in bin order), the node's own pilot subcarriers carry PILOT_AMP (real),
// everything else (DC, guards, the other node's pilots) is zero.
// Timing: the buffer read is registered, so out_* follow the internal bin
// counter by one clock. out_first marks bin 0 of symbol 0, out_last bin 63.
//
// Follows the paper: 48 data subcarriers per OFDM symbol filled from the
// lattice encoding buffer, pilots separated between the two nodes. Own
// choices: pilot positions (A: +-21, B: +-7), pilot value, bin order of data.
module subcarrier_mapping
  import pnc_pkg::*;
#(
  parameter node_e       NODE      = NODE_A,
  parameter int unsigned PILOT_AMP = 8192,
  parameter int unsigned FIFO_AW   = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start_tx,
  input  logic              ifft_ready,
  input  logic              sym_done,
  input  logic [FIFO_AW:0]  fifo_space,
  // lattice encoding buffer read port
  output logic              buf_rd_en,
  output logic [12:0]       buf_rd_addr,
  input  cplx_t             buf_rd_data,
  // symbol stream
  output logic              out_valid,
  output logic [5:0]        out_k,
  output logic [6:0]        out_sym,
  output logic              out_first,
  output logic              out_last,
  output cplx_t             out_data,
  output logic              stall,
  output logic              active
);
  logic [6:0]  sym;
  logic [5:0]  k;
  logic [5:0]  j;
  logic        emitting, in_flight;
  // pipeline register (one clock, aligned with the buffer read)
  logic        p_v, p_data, p_pilot;
  logic [5:0]  p_k;
  logic [6:0]  p_sym;

  logic can_go;
  always_comb can_go = active && !emitting && !in_flight && ifft_ready &&
                       (fifo_space >= (FIFO_AW+1)'(SYM_LEN));

  always_comb begin
    buf_rd_en   = emitting && is_data(kprime(int'(k)));
    buf_rd_addr = 13'(sym) * 13'(N_DATA_SC) + 13'(j);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sym <= '0; k <= '0; j <= '0; emitting <= 1'b0; in_flight <= 1'b0; active <= 1'b0;
      p_v <= 1'b0; p_data <= 1'b0; p_pilot <= 1'b0; p_k <= '0; p_sym <= '0; stall <= 1'b0;
    end else begin
      stall <= active && !emitting && !in_flight && !can_go;
      if (sym_done) in_flight <= 1'b0;
      if (start_tx) begin
        active <= 1'b1; sym <= '0; k <= '0; j <= '0; emitting <= 1'b0; in_flight <= 1'b0;
      end else if (can_go) begin
        emitting <= 1'b1; k <= '0; j <= '0;
      end else if (emitting) begin
        k <= k + 1'b1;
        if (is_data(kprime(int'(k)))) j <= j + 1'b1;
        if (k == 6'd63) begin
          emitting <= 1'b0; in_flight <= 1'b1;
          sym <= sym + 1'b1;
          if (sym == 7'(N_SYMS - 1)) active <= 1'b0;
        end
      end
      p_v     <= emitting && !start_tx;
      p_k     <= k;
      p_sym   <= sym;
      p_data  <= is_data(kprime(int'(k)));
      p_pilot <= is_own_pilot(kprime(int'(k)), NODE);
    end
  end

  always_comb begin
    out_valid = p_v;
    out_k     = p_k;
    out_sym   = p_sym;
    out_first = p_v && p_k == 6'd0 && p_sym == 7'd0;
    out_last  = p_v && p_k == 6'd63;
    if (p_data)       out_data = buf_rd_data;
    else if (p_pilot) out_data = '{re: SW'(PILOT_AMP), im: '0};
    else              out_data = '0;
  end
endmodule
