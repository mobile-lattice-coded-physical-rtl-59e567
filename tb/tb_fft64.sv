// tb_fft64: checks the forward FFT and the inverse FFT with cyclic prefix
// against a direct DFT computed with real arithmetic in the testbench, on
// random inputs and on the LTS. Also checks the transform period
// (64 load + 192 butterflies + output).
module tb_fft64;
  import pnc_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic               in_valid;
  logic signed [15:0] in_re, in_im;
  logic               f_ready, f_ov, i_ready, i_ov;
  logic [5:0]         f_idx, i_idx;
  logic signed [22:0] f_re, f_im, i_re, i_im;

  fft64 #(.DW(16), .INVERSE(1'b0), .CP(0))  u_f (.clk, .rst_n, .in_valid, .in_re, .in_im,
    .in_ready(f_ready), .out_valid(f_ov), .out_idx(f_idx), .out_re(f_re), .out_im(f_im));
  fft64 #(.DW(16), .INVERSE(1'b1), .CP(16)) u_i (.clk, .rst_n, .in_valid, .in_re, .in_im,
    .in_ready(i_ready), .out_valid(i_ov), .out_idx(i_idx), .out_re(i_re), .out_im(i_im));

  real xr [64], xi [64];
  real fr [64], fi [64], ir [64], ii [64];
  int  f_seen, i_seen, i_order_err;
  int  t_last_in, t_first_out;
  int  cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic ref_dft();
    for (int k = 0; k < 64; k++) begin
      fr[k] = 0; fi[k] = 0; ir[k] = 0; ii[k] = 0;
      for (int n = 0; n < 64; n++) begin
        real a; a = 2.0 * 3.14159265358979 * k * n / 64.0;
        fr[k] += xr[n] * $cos(a) + xi[n] * $sin(a);
        fi[k] += xi[n] * $cos(a) - xr[n] * $sin(a);
        ir[k] += (xr[n] * $cos(a) - xi[n] * $sin(a)) / 64.0;
        ii[k] += (xi[n] * $cos(a) + xr[n] * $sin(a)) / 64.0;
      end
    end
  endtask

  always @(posedge clk) begin
    if (f_ov && rst_n) begin
      real er, ei;
      er = f_re - fr[f_idx]; ei = f_im - fi[f_idx];
      checks++;
      if (er > 40.0 || er < -40.0 || ei > 40.0 || ei < -40.0) begin
        failures++;
        $display("FFT bin %0d got %0d %0d exp %f %f", f_idx, f_re, f_im, fr[f_idx], fi[f_idx]);
      end
      if (f_seen == 0) t_first_out = cyc;
      f_seen++;
    end
    if (i_ov && rst_n) begin
      real er, ei;
      er = i_re - ir[i_idx]; ei = i_im - ii[i_idx];
      checks++;
      if (er > 3.0 || er < -3.0 || ei > 3.0 || ei < -3.0) begin
        failures++;
        $display("IFFT n %0d got %0d %0d exp %f %f", i_idx, i_re, i_im, ir[i_idx], ii[i_idx]);
      end
      if ((i_seen < 16 && int'(i_idx) != 48 + i_seen) || (i_seen >= 16 && int'(i_idx) != i_seen - 16))
        i_order_err++;
      i_seen++;
    end
  end

  task automatic run(input int mode);
    cplx_t v;
    int t;
    for (int n = 0; n < 64; n++) begin
      if (mode == 0) begin
        v = lts_td(n); xr[n] = v.re; xi[n] = v.im;
      end else begin
        t = $urandom_range(16000); xr[n] = t - 8000;
        t = $urandom_range(16000); xi[n] = t - 8000;
      end
    end
    ref_dft();
    f_seen = 0; i_seen = 0; i_order_err = 0;
    wait (f_ready && i_ready);
    @(negedge clk);
    for (int n = 0; n < 64; n++) begin
      in_valid = 1'b1; in_re = 16'(int'(xr[n])); in_im = 16'(int'(xi[n]));
      @(negedge clk);
    end
    t_last_in = cyc - 1;
    in_valid = 1'b0;
    wait (f_seen == 64 && i_seen == 80);
    @(negedge clk);
    checks++;
    if (i_order_err != 0) begin failures++; $display("IFFT output order wrong"); end
    checks++;
    if (t_first_out - t_last_in != 194) begin
      failures++; $display("latency %0d", t_first_out - t_last_in);
    end
  endtask

  initial begin
    in_valid = 1'b0; in_re = '0; in_im = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run(0);
    // LTS: forward FFT must show +-K*L[k] on used subcarriers
    for (int rep = 0; rep < 5; rep++) run(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
