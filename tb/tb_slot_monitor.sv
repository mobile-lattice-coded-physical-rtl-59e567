// tb_slot_monitor: feeds pairs of preamble labels (node A then node B) with
// random arrival offsets and checks the measured offset and which node is
// asked to advance (offset > 2: B, offset < -2: A, otherwise none).
`timescale 1ns/1ps
module tb_slot_monitor;
  import pnc_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic peak_valid, pre_ind; node_e node_ind; logic [31:0] peak_time;
  logic adj_req_a, adj_req_b, offset_valid; logic [3:0] adj_amt; logic signed [15:0] offset;
  int checks = 0, failures = 0;
  slot_monitor dut (.*);
  task automatic label(input node_e nd, input logic [31:0] t);
    @(negedge clk); peak_valid = 1'b1; pre_ind = 1'b1; node_ind = nd; peak_time = t;
    @(negedge clk); peak_valid = 1'b0;
  endtask
  initial begin
    int off; logic [31:0] ta;
    peak_valid = 1'b0; pre_ind = 1'b0; node_ind = NODE_A; peak_time = '0;
    repeat (3) @(negedge clk); rst_n = 1'b1;
    for (int i = 0; i < 200; i++) begin
      off = int'($urandom_range(20)) - 10;
      ta = $urandom_range(100000, 1000);
      label(NODE_A, ta);
      @(negedge clk); peak_valid = 1'b1; pre_ind = 1'b1; node_ind = NODE_B; peak_time = ta + 32'(int'(LTS_LEN) + off);
      @(negedge clk); peak_valid = 1'b0;
      checks++; if (!(offset_valid && offset == 16'(off))) begin failures++; $display("FAIL offset %0d want %0d", offset, off); end
      checks++; if (adj_req_b != (off > 2) || adj_req_a != (off < -2)) begin failures++; $display("FAIL request for offset %0d", off); end
      checks++; if (adj_amt != 4'd2) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1ms; $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
