// fft64: 64-point radix-2 decimation-in-time FFT / IFFT, in place, one
// butterfly per clock.
//
// The source design uses a 64-point FFT at the relay (on the received
// postamble LTS) and a 64-point IFFT at the end node (OFDM modulator); it does
// not describe their insides. This implementation is the simplest
// sequential one: 64 input beats are written into a register array in
// bit-reversed order, 6 stages x 32 butterflies are computed in 192 clocks,
// then the result is read out in natural order, preceded by the last CP
// samples when CP > 0 (the cyclic prefix of the transmitter).
//
// Interface: in_valid beats (no gaps required) carry bins/samples 0..63;
// in_ready is low while a transform is in progress. out_valid beats carry
// out_idx (0..63, CP beats carry 64-CP..63 first) and out_data. Output is
// never stalled. Latency from the last input beat to the first output beat is
// 193 clocks; 64 + 192 + CP + 64 clocks per transform.
// Scaling: forward = sum x[n] W^{nk} (no scaling, width grows by 6 bits);
// inverse = (1/64) sum X[k] W^{-nk}, rounded.
// Twiddles: cos(2*pi*e/64) from the quarter-wave table in pnc_pkg (Q2.14).
module fft64
  import pnc_pkg::*;
#(
  parameter int unsigned DW      = 16,        // input I/Q width
  parameter bit          INVERSE = 1'b0,
  parameter int unsigned CP      = 0
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [DW-1:0]    in_re,
  input  logic signed [DW-1:0]    in_im,
  output logic                    in_ready,
  output logic                    out_valid,
  output logic [5:0]              out_idx,
  output logic signed [DW+6:0]    out_re,
  output logic signed [DW+6:0]    out_im
);
  localparam int unsigned IW = DW + 7;   // internal width (growth 6 + 1)

  typedef enum logic [1:0] {S_LOAD, S_CALC, S_OUT} st_e;
  st_e st;

  logic signed [IW-1:0] mre [64];
  logic signed [IW-1:0] mim [64];

  logic [5:0] cnt;       // load / output counter
  logic [2:0] stage;
  logic [4:0] bf;        // butterfly within stage
  logic [6:0] ocnt;

  function automatic logic [5:0] bitrev6(input logic [5:0] a);
    return {a[0], a[1], a[2], a[3], a[4], a[5]};
  endfunction

  // butterfly addressing
  logic [5:0] ia, ib;
  logic [4:0] e;         // twiddle exponent 0..31
  logic signed [17:0] wc, ws;
  always_comb begin
    logic [5:0] span, grp, pos;
    span = 6'd1 << stage;
    pos  = 6'({1'b0, bf}) & (span - 6'd1);
    grp  = (6'({1'b0, bf}) >> stage) << (stage + 3'd1);
    ia   = grp | pos;
    ib   = ia + span;
    e    = 5'(pos << (3'd5 - stage));
    if (e <= 5'd16) begin
      wc = 18'(cos_q14(int'(e)));
      ws = 18'(cos_q14(16 - int'(e)));
    end else begin
      wc = -18'(cos_q14(32 - int'(e)));
      ws = 18'(cos_q14(int'(e) - 16));
    end
    // forward W = cos - j sin, inverse W = cos + j sin
    if (!INVERSE) ws = -ws;
  end

  logic signed [IW+18:0] pr, pi;
  logic signed [IW-1:0]  tr, ti;
  always_comb begin
    pr = mre[ib] * wc - mim[ib] * ws;
    pi = mre[ib] * ws + mim[ib] * wc;
    tr = IW'((pr + (1 <<< 13)) >>> 14);
    ti = IW'((pi + (1 <<< 13)) >>> 14);
  end

  // output index: CP first, then 0..63
  logic [5:0] oidx;
  always_comb oidx = (ocnt < 7'(CP)) ? 6'(64 - CP + ocnt) : 6'(ocnt - 7'(CP));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_LOAD; cnt <= '0; stage <= '0; bf <= '0; ocnt <= '0;
      out_valid <= 1'b0; out_idx <= '0; out_re <= '0; out_im <= '0;
      for (int i = 0; i < 64; i++) begin mre[i] <= '0; mim[i] <= '0; end
    end else begin
      out_valid <= 1'b0;
      unique case (st)
        S_LOAD: if (in_valid) begin
          mre[bitrev6(cnt)] <= IW'(in_re);
          mim[bitrev6(cnt)] <= IW'(in_im);
          cnt <= cnt + 1'b1;
          if (cnt == 6'd63) begin st <= S_CALC; stage <= '0; bf <= '0; end
        end
        S_CALC: begin
          mre[ia] <= mre[ia] + tr;  mim[ia] <= mim[ia] + ti;
          mre[ib] <= mre[ia] - tr;  mim[ib] <= mim[ia] - ti;
          bf <= bf + 1'b1;
          if (bf == 5'd31) begin
            stage <= stage + 1'b1;
            if (stage == 3'd5) begin st <= S_OUT; ocnt <= '0; end
          end
        end
        S_OUT: begin
          out_valid <= 1'b1;
          out_idx   <= oidx;
          if (INVERSE) begin
            out_re <= (mre[oidx] + 32) >>> 6;
            out_im <= (mim[oidx] + 32) >>> 6;
          end else begin
            out_re <= mre[oidx];
            out_im <= mim[oidx];
          end
          ocnt <= ocnt + 1'b1;
          if (ocnt == 7'(CP + 63)) begin st <= S_LOAD; cnt <= '0; end
        end
        default: st <= S_LOAD;
      endcase
    end
  end

  assign in_ready = (st == S_LOAD);
endmodule
