// node_tx: uplink transmitter of one end node (node A or B).
//
// Chain: time-slotted scheduler -> (per packet) subcarrier mapping from the
// lattice encoding buffer -> frequency-domain precoding (phase interpolation,
// SFO precoding, CFO phase drift, phase adjustment, amplitude equalization,
// A*e^{j*theta} x data) -> 64-point IFFT with 16-sample cyclic prefix ->
// time-domain CFO precoding -> sample FIFO -> preamble/postamble insertion
// -> DAC interface.
// One system clock; smp_tick is the sample-rate enable (the DAC clock), at
// most one per SAMPLE_DIV clocks is assumed by the throughput budget: one
// OFDM symbol takes about 380 clocks to produce and 80 ticks to send. The
// producer runs ahead of transmission and stops when the FIFO cannot take
// another symbol (`stall`).
// Inputs from the node's downlink side (not built here): beacon, the
// relay's slot-advance request (adj_req, adj_amt), the relay feedback
// (fb_valid, fb) and the calibration / downlink-channel tables.
// The lattice encoding buffer is written through enc_we/enc_addr/enc_data
// by the (external) lattice encoder; its contents are resent every slot.
//
// Follows the paper: the end-node transmitter diagram (Fig. 22). Own
// choices: the single-clock streaming organisation and FIFO decoupling.
module node_tx
  import pnc_pkg::*;
#(
  parameter node_e       NODE      = NODE_A,
  parameter int unsigned SLOT      = SLOT_LEN,
  parameter int unsigned FS_FC_Q20 = 8389,
  parameter int unsigned DAC_W     = 12
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        smp_tick,
  input  logic        beacon,
  input  logic        adj_req,
  input  logic [3:0]  adj_amt,
  input  logic        fb_valid,
  input  feedback_t   fb,
  // lattice encoder interface
  input  logic        enc_we,
  input  logic [12:0] enc_addr,
  input  cplx_t       enc_data,
  // calibration / downlink tables
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
  // to the radio
  output logic signed [DAC_W-1:0] dac_i,
  output logic signed [DAC_W-1:0] dac_q,
  output logic        tx_en,
  // status
  output logic        start_tx,
  output logic        adj_pulse,
  output logic        post_tx,
  output logic        pkt_done,
  output logic        stall,
  output logic        underrun,
  output logic        wrap_fix,
  output logic [5:0]  d_total,
  output logic [31:0] slot_idx
);
  localparam int unsigned FD = 256;
  localparam int unsigned FAW = $clog2(FD);

  logic [3:0]  adj_done;
  logic        running;
  time_slotted_scheduler #(.SLOT(SLOT)) u_sched (
    .clk, .rst_n, .smp_tick, .beacon, .adj_req, .adj_amt,
    .start_tx, .adj_pulse, .adj_done, .running, .slot_idx);

  logic        b_rd_en, filled;
  logic [12:0] b_rd_addr;
  cplx_t       b_rd_data;
  lattice_encoding_buffer u_buf (
    .clk, .rst_n, .wr_en(enc_we), .wr_addr(enc_addr), .wr_data(enc_data),
    .rd_en(b_rd_en), .rd_addr(b_rd_addr), .rd_data(b_rd_data), .filled);

  logic        ifft_ready, sym_done;
  logic [FAW:0] f_count, f_space;
  logic        m_v, m_first, m_last, m_active;
  logic [5:0]  m_k;
  logic [6:0]  m_sym;
  cplx_t       m_d;
  always_comb f_space = (FAW+1)'(FD) - f_count;

  subcarrier_mapping #(.NODE(NODE), .FIFO_AW(FAW)) u_map (
    .clk, .rst_n, .start_tx, .ifft_ready, .sym_done, .fifo_space(f_space),
    .buf_rd_en(b_rd_en), .buf_rd_addr(b_rd_addr), .buf_rd_data(b_rd_data),
    .out_valid(m_v), .out_k(m_k), .out_sym(m_sym), .out_first(m_first), .out_last(m_last),
    .out_data(m_d), .stall, .active(m_active));

  logic        p_v, p_first, p_last;
  logic [5:0]  p_k;
  cplx_t       p_d;
  cfo_t        cfo;
  logic        amp_busy;
  logic [15:0] amp_gain;
  freq_domain_precoding #(.SLOT(SLOT), .FS_FC_Q20(FS_FC_Q20)) u_fdp (
    .clk, .rst_n, .smp_tick, .start_tx, .post_tx, .adj_pulse, .adj_amt(adj_done),
    .cal_we, .cal_k, .cal_val, .dnph_we, .dnph_k, .dnph_val,
    .rho_we, .rho_k, .rho_val, .dnamp_we, .dnamp_k, .dnamp_val,
    .fb_valid, .fb,
    .in_valid(m_v), .in_k(m_k), .in_sym(m_sym), .in_first(m_first), .in_last(m_last), .in_data(m_d),
    .out_valid(p_v), .out_k(p_k), .out_first(p_first), .out_last(p_last), .out_data(p_d),
    .cfo_o(cfo), .wrap_fix, .amp_busy, .amp_gain, .d_total);

  logic        i_v;
  logic [5:0]  i_idx;
  logic signed [22:0] i_re, i_im;
  logic        i_rdy;
  fft64 #(.DW(16), .INVERSE(1'b1), .CP(CP_LEN)) u_ifft (
    .clk, .rst_n, .in_valid(p_v), .in_re(p_d.re), .in_im(p_d.im), .in_ready(i_rdy),
    .out_valid(i_v), .out_idx(i_idx), .out_re(i_re), .out_im(i_im));
  assign ifft_ready = i_rdy;

  // mark the first and last output sample of each symbol for the NCO
  logic       first_pend;
  logic [6:0] ocnt;
  logic       t_first, t_last;
  always_comb begin
    t_first = i_v && first_pend && ocnt == 7'd0;
    t_last  = i_v && ocnt == 7'(SYM_LEN - 1);
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin first_pend <= 1'b0; ocnt <= '0; end
    else begin
      if (p_first) first_pend <= 1'b1;
      else if (t_first) first_pend <= 1'b0;
      if (start_tx) ocnt <= '0;
      else if (i_v) ocnt <= (ocnt == 7'(SYM_LEN - 1)) ? '0 : ocnt + 1'b1;
    end
  end

  logic  t_v, t_l;
  cplx_t t_d;
  time_domain_cfo_precoding u_tdc (
    .clk, .rst_n, .cfo, .in_valid(i_v), .in_first(t_first), .in_last(t_last),
    .in_re(i_re), .in_im(i_im), .out_valid(t_v), .out_last(t_l), .out_data(t_d));
  assign sym_done = t_l;

  cplx_t f_rd;
  logic  f_pop;
  sample_fifo #(.DEPTH(FD)) u_fifo (
    .clk, .rst_n, .clear(start_tx), .push(t_v), .wr_data(t_d), .pop(f_pop),
    .rd_data(f_rd), .count(f_count));

  logic  tx_valid, data_start;
  cplx_t tx_sample;
  preamble_postamble_insertion #(.NODE(NODE)) u_ins (
    .clk, .rst_n, .smp_tick, .start_tx, .fifo_data(f_rd), .fifo_empty(f_count == 0),
    .fifo_pop(f_pop), .tx_valid, .tx_sample, .data_start, .post_tx, .pkt_done, .underrun);

  dac_interface #(.DAC_W(DAC_W)) u_dac (
    .clk, .rst_n, .smp_tick, .tx_valid, .tx_sample, .dac_i, .dac_q, .tx_en);
endmodule
