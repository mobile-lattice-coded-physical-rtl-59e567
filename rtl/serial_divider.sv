// serial_divider: unsigned restoring divider, one quotient bit per clock.
//
// Pulse start with num/den; NW+1 clocks later done pulses for one cycle with
// quot = num / den (truncated). den = 0 gives an all-ones quotient. The
// divider is busy from start to done; a start while busy is ignored. Used by
// the CFO estimate (division by the preamble-postamble distance), the
// amplitude averaging and the amplitude equalization.
module serial_divider #(
  parameter int unsigned NW = 32,
  parameter int unsigned DW = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [NW-1:0] num,
  input  logic [DW-1:0] den,
  output logic          busy,
  output logic          done,
  output logic [NW-1:0] quot
);
  logic [NW-1:0]        n_q;
  logic [DW:0]          rem;
  logic [DW-1:0]        d_q;
  logic [$clog2(NW+1)-1:0] cnt;
  logic [DW+1:0]        trial;

  always_comb trial = {rem, n_q[NW-1]} - {2'b00, d_q};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; quot <= '0; n_q <= '0; rem <= '0; d_q <= '0; cnt <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1; n_q <= num; d_q <= den; rem <= '0; cnt <= '0; quot <= '0;
      end else if (busy) begin
        if (!trial[DW+1]) begin
          rem  <= trial[DW:0];
          quot <= {quot[NW-2:0], 1'b1};
        end else begin
          rem  <= {rem[DW-1:0], n_q[NW-1]};
          quot <= {quot[NW-2:0], 1'b0};
        end
        n_q <= {n_q[NW-2:0], 1'b0};
        cnt <= cnt + 1'b1;
        if (cnt == NW - 1) begin
          busy <= 1'b0; done <= 1'b1;
        end
      end
    end
  end
endmodule
