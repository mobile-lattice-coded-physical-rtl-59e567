// pnc_top: the channel-alignment part of a two-way relay PNC system: the
// uplink transmitters of end nodes A and B and the relay's receiver
// front-end, in one clock domain.
//
// The relay receiver (relay_rx) takes the relay's ADC samples, finds the
// four LTS of every PNC packet, estimates each node's CFO (preamble to
// postamble), its per-subcarrier phase (postamble) and its pilot amplitude,
// and watches the arrival asynchrony of the two nodes. Its feedback
// (two phases, amplitude factor, CFO) and slot-advance requests are carried
// to the node transmitters here by direct wires, i.e. an ideal downlink
// (the downlink PHY is not part of this design). Each node_tx precodes its
// next packet with that feedback and sends it in its time slot through its
// DAC port.
// Interface: smp_tick is the common 20 MHz sample enable of the DACs and the
// relay ADC (adc_valid is normally smp_tick delayed by the channel); beacon
// starts both slot timers. Table and lattice-buffer write ports are shared
// and steered by tbl_node / enc_node. The frequency-domain data stream of
// the relay's (external) data receiver feeds the amplitude averaging.
// Follows the paper: the relay receiver (Fig. 21) and end-node transmitter
// (Fig. 22) blocks and the feedback contents. Own choices: single clock,
// ideal downlink wiring, shared configuration ports.
module pnc_top
  import pnc_pkg::*;
#(
  parameter int unsigned SLOT  = SLOT_LEN,
  parameter int unsigned DAC_W = 12
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        smp_tick,
  input  logic        beacon,
  // relay ADC and settings
  input  logic        adc_valid,
  input  cplx_t       adc_rx,
  input  logic [23:0] threshold,
  input  cfo_t        rough_cfo_a,
  input  cfo_t        rough_cfo_b,
  // relay data receiver (external) frequency-domain stream
  input  logic        fd_valid,
  input  logic [5:0]  fd_bin,
  input  logic signed [22:0] fd_re,
  input  logic signed [22:0] fd_im,
  input  logic        pkt_end,
  // relay phase buffer read (initial calibration)
  input  node_e       rd_node,
  input  logic [5:0]  rd_bin,
  output phase_t      rd_phase,
  output logic [15:0] rd_mag,
  // node configuration
  input  node_e       tbl_node,
  input  logic        cal_we,
  input  logic [5:0]  cal_k,
  input  phase_t      cal_val,
  input  logic        dnph_we,
  input  logic [5:0]  dnph_k,
  input  phase_t      dnph_val,
  input  logic        rho_we,
  input  logic [5:0]  rho_k,
  input  logic [15:0] rho_val,
  input  logic        dnamp_we,
  input  logic [5:0]  dnamp_k,
  input  logic [15:0] dnamp_val,
  input  node_e       enc_node,
  input  logic        enc_we,
  input  logic [12:0] enc_addr,
  input  cplx_t       enc_data,
  // DACs
  output logic signed [DAC_W-1:0] dac_a_i,
  output logic signed [DAC_W-1:0] dac_a_q,
  output logic        tx_en_a,
  output logic signed [DAC_W-1:0] dac_b_i,
  output logic signed [DAC_W-1:0] dac_b_q,
  output logic        tx_en_b,
  // observation
  output logic        fb_valid_a,
  output feedback_t   fb_a,
  output logic        fb_valid_b,
  output feedback_t   fb_b,
  output logic        adj_req_a,
  output logic        adj_req_b,
  output logic signed [15:0] slot_offset,
  output logic        peak_valid,
  output logic        pre_ind,
  output logic        post_ind,
  output node_e       node_ind,
  output logic [31:0] peak_time,
  output logic [1:0]  start_tx,
  output logic [1:0]  adj_pulse,
  output logic [1:0]  post_tx,
  output logic [1:0]  pkt_done,
  output logic [1:0]  stall,
  output logic [1:0]  underrun,
  output logic [1:0]  wrap_fix,
  output logic [5:0]  d_total_a,
  output logic [5:0]  d_total_b
);
  logic [3:0] adj_amt;

  relay_rx u_relay (
    .clk, .rst_n, .smp_valid(adc_valid), .rx(adc_rx), .threshold, .rough_cfo_a, .rough_cfo_b,
    .fd_valid, .fd_bin, .fd_re, .fd_im, .pkt_end,
    .fb_valid_a, .fb_a, .fb_valid_b, .fb_b, .adj_req_a, .adj_req_b, .adj_amt, .slot_offset,
    .rd_node, .rd_bin, .rd_phase, .rd_mag,
    .peak_valid, .pre_ind, .post_ind, .node_ind, .peak_time);

  logic [31:0] slot_a, slot_b;

  node_tx #(.NODE(NODE_A), .SLOT(SLOT), .DAC_W(DAC_W)) u_node_a (
    .clk, .rst_n, .smp_tick, .beacon, .adj_req(adj_req_a), .adj_amt,
    .fb_valid(fb_valid_a), .fb(fb_a),
    .enc_we(enc_we && enc_node == NODE_A), .enc_addr, .enc_data,
    .cal_we(cal_we && tbl_node == NODE_A), .cal_k, .cal_val,
    .dnph_we(dnph_we && tbl_node == NODE_A), .dnph_k, .dnph_val,
    .rho_we(rho_we && tbl_node == NODE_A), .rho_k, .rho_val,
    .dnamp_we(dnamp_we && tbl_node == NODE_A), .dnamp_k, .dnamp_val,
    .dac_i(dac_a_i), .dac_q(dac_a_q), .tx_en(tx_en_a),
    .start_tx(start_tx[0]), .adj_pulse(adj_pulse[0]), .post_tx(post_tx[0]),
    .pkt_done(pkt_done[0]), .stall(stall[0]), .underrun(underrun[0]), .wrap_fix(wrap_fix[0]),
    .d_total(d_total_a), .slot_idx(slot_a));

  node_tx #(.NODE(NODE_B), .SLOT(SLOT), .DAC_W(DAC_W)) u_node_b (
    .clk, .rst_n, .smp_tick, .beacon, .adj_req(adj_req_b), .adj_amt,
    .fb_valid(fb_valid_b), .fb(fb_b),
    .enc_we(enc_we && enc_node == NODE_B), .enc_addr, .enc_data,
    .cal_we(cal_we && tbl_node == NODE_B), .cal_k, .cal_val,
    .dnph_we(dnph_we && tbl_node == NODE_B), .dnph_k, .dnph_val,
    .rho_we(rho_we && tbl_node == NODE_B), .rho_k, .rho_val,
    .dnamp_we(dnamp_we && tbl_node == NODE_B), .dnamp_k, .dnamp_val,
    .dac_i(dac_b_i), .dac_q(dac_b_q), .tx_en(tx_en_b),
    .start_tx(start_tx[1]), .adj_pulse(adj_pulse[1]), .post_tx(post_tx[1]),
    .pkt_done(pkt_done[1]), .stall(stall[1]), .underrun(underrun[1]), .wrap_fix(wrap_fix[1]),
    .d_total(d_total_b), .slot_idx(slot_b));
endmodule
