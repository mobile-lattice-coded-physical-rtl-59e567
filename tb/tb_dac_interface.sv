// tb_dac_interface: random 16-bit samples on random sample ticks; checks the
// rounded, saturated 12-bit DAC words, zero output and tx_en outside packets.
`timescale 1ns/1ps
module tb_dac_interface;
  import pnc_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic smp_tick, tx_valid; cplx_t tx_sample;
  logic signed [11:0] dac_i, dac_q; logic tx_en;
  int checks = 0, failures = 0;
  dac_interface dut (.*);
  function automatic int conv(input int v);
    int r; r = (v + 8) >>> 4; if (r > 2047) r = 2047; if (r < -2048) r = -2048; return r;
  endfunction
  initial begin
    int vi, vq;
    smp_tick = 0; tx_valid = 0; tx_sample = '0;
    repeat (3) @(negedge clk); rst_n = 1'b1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      smp_tick = 1'b1; tx_valid = ($urandom_range(3) != 0);
      vi = int'($urandom_range(65535)) - 32768; vq = int'($urandom_range(65535)) - 32768;
      tx_sample.re = 16'(vi); tx_sample.im = 16'(vq);
      @(negedge clk); smp_tick = 1'b0;
      checks++;
      if (tx_en != tx_valid || int'(dac_i) != (tx_valid ? conv(vi) : 0) || int'(dac_q) != (tx_valid ? conv(vq) : 0)) begin
        failures++; $display("FAIL %0d %0d -> %0d %0d", vi, vq, dac_i, dac_q);
      end
      // no tick: output must hold
      tx_sample = '0; @(negedge clk);
      checks++; if (int'(dac_i) != (tx_valid ? conv(vi) : 0)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1ms; $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
