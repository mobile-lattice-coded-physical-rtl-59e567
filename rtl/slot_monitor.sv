// slot_monitor: watches the arrival-time offset of the two end nodes at the
// relay and asks the lagging node to advance its time slot.
//
// In a PNC packet node B's preamble LTS is sent one LTS length (80 samples)
// after node A's, so with aligned slots the two preamble LTS peaks reported
// by lts_correlation are exactly LTS_LEN apart. The asynchrony is
// offset = (t_B - t_A) - LTS_LEN. When offset > DTH (B late) node B is asked
// to advance by DTH samples; when offset < -DTH node A is. One request at
// most per packet, issued one clock after B's preamble peak.
//
// Follows the paper: threshold d_thresh = 2 samples, request to the lagging
// node to adjust its timer ahead by d_thresh. Own choices: only the preamble
// peaks are used, and "larger than" is taken as a strict comparison.
module slot_monitor
  import pnc_pkg::*;
#(
  parameter int unsigned DTH = D_THRESH
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               peak_valid,
  input  logic               pre_ind,
  input  node_e              node_ind,
  input  logic [31:0]        peak_time,
  output logic               adj_req_a,   // pulse: node A must advance
  output logic               adj_req_b,   // pulse: node B must advance
  output logic [3:0]         adj_amt,     // samples to advance
  output logic signed [15:0] offset,      // last measured asynchrony
  output logic               offset_valid
);
  logic [31:0] t_a;
  logic        have_a;
  logic signed [31:0] off_c;
  always_comb off_c = $signed(peak_time - t_a) - 32'(LTS_LEN);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      t_a <= '0; have_a <= 1'b0; adj_req_a <= 1'b0; adj_req_b <= 1'b0;
      offset <= '0; offset_valid <= 1'b0;
    end else begin
      adj_req_a <= 1'b0; adj_req_b <= 1'b0; offset_valid <= 1'b0;
      if (peak_valid && pre_ind) begin
        if (node_ind == NODE_A) begin
          t_a <= peak_time; have_a <= 1'b1;
        end else if (have_a) begin
          have_a       <= 1'b0;
          offset       <= 16'(off_c);
          offset_valid <= 1'b1;
          if (off_c > $signed(32'(DTH)))        adj_req_b <= 1'b1;
          else if (off_c < -$signed(32'(DTH)))  adj_req_a <= 1'b1;
        end
      end
    end
  end
  assign adj_amt = 4'(DTH);
endmodule
