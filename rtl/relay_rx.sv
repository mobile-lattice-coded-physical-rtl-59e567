// relay_rx: preamble/postamble processing of the relay receiver.
//
// Wires the relay blocks of the receiver diagram: the received samples go to
// the LTS correlation, the CFO estimation and the phase estimation; the LTS
// correlation labels the four LTS of a packet (preamble/postamble, node A/B)
// for the other two blocks and for the slot monitor, which asks the lagging
// node to advance its slot. The amplitude averaging works on the
// frequency-domain pilots of the data symbols, which come from the relay's
// data receiver (outside this block, ports fd_*).
//
// Per node and packet the relay feeds back four numbers (feedback_t): the
// uplink phases at k' = -26 and +26, the amplitude scaling factor and the
// CFO. fb_valid_x pulses when both the CFO and the phase pair of node x of
// the current packet are available; the amplitude field carries the latest
// factor from the amplitude averaging (1.0 until the first one). The full
// phase buffer stays readable (rd_*) for the initial calibration, where all
// subcarrier phases are fed back once.
//
// Timing: all feedback values are ready about 340 clocks after the postamble
// LTS peak of node B (2.1 us at 160 MHz).
module relay_rx
  import pnc_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        smp_valid,
  input  cplx_t       rx,
  input  logic [23:0] threshold,
  input  cfo_t        rough_cfo_a,
  input  cfo_t        rough_cfo_b,
  // frequency-domain data symbols from the data receiver
  input  logic        fd_valid,
  input  logic [5:0]  fd_bin,
  input  logic signed [22:0] fd_re,
  input  logic signed [22:0] fd_im,
  input  logic        pkt_end,
  // feedback to the end nodes
  output logic        fb_valid_a,
  output feedback_t   fb_a,
  output logic        fb_valid_b,
  output feedback_t   fb_b,
  // time slot adjustment requests
  output logic        adj_req_a,
  output logic        adj_req_b,
  output logic [3:0]  adj_amt,
  output logic signed [15:0] slot_offset,
  // full phase buffer (initial calibration)
  input  node_e       rd_node,
  input  logic [5:0]  rd_bin,
  output phase_t      rd_phase,
  output logic [15:0] rd_mag,
  // label stream, for observation
  output logic        peak_valid,
  output logic        pre_ind,
  output logic        post_ind,
  output node_e       node_ind,
  output logic [31:0] peak_time
);
  logic [31:0] smp_time;
  lts_correlation u_lts (
    .clk, .rst_n, .smp_valid, .rx, .threshold,
    .peak_valid, .pre_ind, .post_ind, .node_ind, .peak_time, .smp_time);

  logic off_valid;
  slot_monitor u_mon (
    .clk, .rst_n, .peak_valid, .pre_ind, .node_ind, .peak_time,
    .adj_req_a, .adj_req_b, .adj_amt, .offset(slot_offset), .offset_valid(off_valid));

  logic   cfo_valid;
  node_e  cfo_node;
  cfo_t   cfo;
  phase_t frac_angle;
  logic signed [15:0] turns;
  cfo_estimation u_cfo (
    .clk, .rst_n, .smp_valid, .rx, .peak_valid, .pre_ind, .post_ind, .node_ind, .peak_time,
    .rough_cfo_a, .rough_cfo_b, .cfo_valid, .cfo_node, .cfo, .frac_angle, .turns);

  logic   ph_valid;
  node_e  ph_node;
  phase_t ph_k1, ph_k2;
  phase_estimation u_ph (
    .clk, .rst_n, .smp_valid, .rx, .peak_valid, .post_ind, .node_ind,
    .rd_node, .rd_bin, .rd_phase, .rd_mag,
    .fb_valid(ph_valid), .fb_node(ph_node), .fb_ph_k1(ph_k1), .fb_ph_k2(ph_k2));

  logic        amp_valid;
  node_e       amp_node;
  logic [15:0] amp_scale;
  amplitude_averaging u_amp (
    .clk, .rst_n, .fd_valid, .fd_bin, .fd_re, .fd_im, .pkt_end,
    .amp_valid, .amp_node, .amp_scale);

  // feedback assembly
  feedback_t fb_q [2];
  logic [1:0] have_cfo, have_ph;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int n = 0; n < 2; n++) begin
        fb_q[n] <= '{ph_k1: '0, ph_k2: '0, amp: 16'h1000, cfo: '0, off: '0};
      end
      have_cfo <= '0; have_ph <= '0;
      fb_valid_a <= 1'b0; fb_valid_b <= 1'b0; fb_a <= '0; fb_b <= '0;
    end else begin
      fb_valid_a <= 1'b0; fb_valid_b <= 1'b0;
      if (cfo_valid) begin fb_q[cfo_node].cfo <= cfo; have_cfo[cfo_node] <= 1'b1; end
      if (ph_valid) begin
        fb_q[ph_node].ph_k1 <= ph_k1; fb_q[ph_node].ph_k2 <= ph_k2; have_ph[ph_node] <= 1'b1;
      end
      if (have_cfo[0] && have_ph[0]) begin
        fb_valid_a <= 1'b1; fb_a <= fb_q[0]; have_cfo[0] <= 1'b0; have_ph[0] <= 1'b0;
        fb_q[0].amp <= 16'h1000;
      end
      if (have_cfo[1] && have_ph[1]) begin
        fb_valid_b <= 1'b1; fb_b <= fb_q[1]; have_cfo[1] <= 1'b0; have_ph[1] <= 1'b0;
        fb_q[1].amp <= 16'h1000;
      end
      // a factor is sent once; a node without a new one gets 1.0
      if (amp_valid) fb_q[amp_node].amp <= amp_scale;
      // node B's arrival offset behind node A, in the relay's common frame
      if (off_valid) fb_q[1].off <= (slot_offset > 16'sd127) ? 8'sd127 :
                                    (slot_offset < -16'sd128) ? -8'sd128 : 8'(slot_offset);
    end
  end
endmodule
