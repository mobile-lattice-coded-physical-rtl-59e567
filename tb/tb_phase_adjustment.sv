// tb_phase_adjustment: applies random slot advances and feedback offsets
// and checks the ramp -(k*(D - base) mod 64)/64 turn on every bin, base being
// the advance total of the fed-back packet plus the fed-back offset.
`timescale 1ns/1ps
module tb_phase_adjustment;
  import pnc_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic adj_pulse, start_tx, fb_valid; logic [3:0] adj_amt; logic signed [7:0] fb_off;
  logic [5:0] k, d_total, d_sent; phase_t phase;
  int checks = 0, failures = 0;
  phase_adjustment dut (.*);
  initial begin
    int dm, base, sent;
    adj_pulse = 0; start_tx = 0; fb_valid = 0; adj_amt = 0; fb_off = 0; k = 0;
    dm = 0; base = 0; sent = 0;
    repeat (3) @(negedge clk); rst_n = 1'b1;
    for (int it = 0; it < 60; it++) begin
      @(negedge clk); adj_pulse = 1'b1; adj_amt = 4'($urandom_range(3)); dm += adj_amt;
      @(negedge clk); adj_pulse = 1'b0; start_tx = 1'b1; sent = dm;
      @(negedge clk); start_tx = 1'b0; fb_valid = 1'b1; fb_off = 8'(int'($urandom_range(8)) - 4);
      base = sent + fb_off;
      @(negedge clk); fb_valid = 1'b0;
      @(negedge clk); adj_pulse = 1'b1; adj_amt = 4'($urandom_range(2)); dm += adj_amt;
      @(negedge clk); adj_pulse = 1'b0;
      for (int b = 0; b < 64; b++) begin
        k = 6'(b);
        @(negedge clk);
        checks++;
        if (phase !== phase_t'(-(((b * (dm - base)) % 64 + 64) % 64) * 1024)) begin
          failures++; $display("FAIL k=%0d D=%0d base=%0d phase %h", b, dm, base, phase);
        end
      end
      checks++; if (d_total != 6'(dm) || d_sent != 6'(sent)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1ms; $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
