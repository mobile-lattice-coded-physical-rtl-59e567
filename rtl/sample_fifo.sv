// sample_fifo: synchronous FIFO of complex samples between the symbol
// producer of the end-node transmitter and the packet assembly, which drains
// it at the sample rate. Registered-free read: rd_data shows the head entry;
// pop removes it. count is the fill level. Pushing when full and popping
// when empty are ignored (the producer checks `count`, the packet assembly
// reports an underrun).
module sample_fifo
  import pnc_pkg::*;
#(
  parameter int unsigned DEPTH = 256
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       clear,
  input  logic                       push,
  input  cplx_t                      wr_data,
  input  logic                       pop,
  output cplx_t                      rd_data,
  output logic [$clog2(DEPTH):0]     count
);
  localparam int unsigned AW = $clog2(DEPTH);
  cplx_t mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic do_push, do_pop;
  always_comb begin
    do_push = push && (count != (AW+1)'(DEPTH));
    do_pop  = pop && (count != 0);
  end
  always_ff @(posedge clk) if (do_push) mem[wp] <= wr_data;
  assign rd_data = mem[rp];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else if (clear) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (do_push) wp <= wp + 1'b1;
      if (do_pop)  rp <= rp + 1'b1;
      count <= count + (AW+1)'(do_push) - (AW+1)'(do_pop);
    end
  end
endmodule
