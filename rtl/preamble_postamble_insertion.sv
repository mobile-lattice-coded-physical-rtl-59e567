// preamble_postamble_insertion: assembles the end node's uplink packet in
// time: training sections from tables, data samples from the sample FIFO.
//
// Packet of PKT_LEN samples (Fig. 16 layout), position p from 0:
//   node A: STS x10 (160) | zero (160) | LTS (80) | zero (80) | DATA (8000)
//           | LTS (80) | zero (80)
//   node B: zero (160) | STS x10 (160) | zero (80) | LTS (80) | DATA (8000)
//           | zero (80) | LTS (80)
// so at the relay the two nodes' training sections never overlap while the
// data sections do. The LTS is 16 cyclic-prefix samples followed by the
// 64-sample body.
// Timing: start_tx (one clock after the slot's first sample tick) arms the
// packet; each later smp_tick presents the next sample on tx_sample with
// tx_valid (registered). During DATA one FIFO entry is popped per tick; an
// empty FIFO gives a zero sample and an `underrun` pulse. post_tx pulses when
// the first body sample of the node's own postamble LTS is sent (the time
// reference of the relay's phase measurement); pkt_done after the last
// sample.
// Follows the paper: preamble (STS, LTS) and postamble (LTS) around the data
// with the two nodes' training separated in time. Own choices: the section
// lengths of the zero gaps and the FIFO interface.
module preamble_postamble_insertion
  import pnc_pkg::*;
#(
  parameter node_e NODE = NODE_A
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        smp_tick,
  input  logic        start_tx,
  input  cplx_t       fifo_data,
  input  logic        fifo_empty,
  output logic        fifo_pop,
  output logic        tx_valid,
  output cplx_t       tx_sample,
  output logic        data_start,
  output logic        post_tx,
  output logic        pkt_done,
  output logic        underrun
);
  localparam int unsigned STS_A  = 0;
  localparam int unsigned STS_B  = SEC_STS;
  localparam int unsigned LTS_A  = 2 * SEC_STS;
  localparam int unsigned LTS_B  = 2 * SEC_STS + LTS_LEN;
  localparam int unsigned DATA0  = PRE_LEN;
  localparam int unsigned POST_A = PRE_LEN + DATA_LEN;
  localparam int unsigned POST_B = POST_A + LTS_LEN;
  localparam int unsigned MY_STS  = (NODE == NODE_A) ? STS_A  : STS_B;
  localparam int unsigned MY_LTS  = (NODE == NODE_A) ? LTS_A  : LTS_B;
  localparam int unsigned MY_POST = (NODE == NODE_A) ? POST_A : POST_B;

  logic        armed, active;
  logic [13:0] pos;

  function automatic cplx_t lts_at(input int i);   // i = 0..79
    return (i < int'(CP_LEN)) ? lts_td(i + int'(N_FFT - CP_LEN)) : lts_td(i - int'(CP_LEN));
  endfunction

  logic  in_data;
  cplx_t smp;
  always_comb begin
    int p;
    p = int'(pos);
    in_data = (p >= int'(DATA0)) && (p < int'(POST_A));
    smp = '0;
    if (p >= int'(MY_STS) && p < int'(MY_STS + SEC_STS))       smp = sts_td((p - int'(MY_STS)) % int'(STS_LEN));
    else if (p >= int'(MY_LTS) && p < int'(MY_LTS + LTS_LEN))  smp = lts_at(p - int'(MY_LTS));
    else if (p >= int'(MY_POST) && p < int'(MY_POST + LTS_LEN)) smp = lts_at(p - int'(MY_POST));
    else if (in_data)                                          smp = fifo_empty ? '0 : fifo_data;
    fifo_pop = smp_tick && active && in_data && !fifo_empty;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      armed <= 1'b0; active <= 1'b0; pos <= '0;
      tx_valid <= 1'b0; tx_sample <= '0;
      data_start <= 1'b0; post_tx <= 1'b0; pkt_done <= 1'b0; underrun <= 1'b0;
    end else begin
      data_start <= 1'b0; post_tx <= 1'b0; pkt_done <= 1'b0; underrun <= 1'b0;
      if (start_tx) begin
        armed <= 1'b1; active <= 1'b0; pos <= '0;
      end else if (smp_tick) begin
        if (armed) begin
          armed <= 1'b0; active <= 1'b1; pos <= '0;
        end
        if (active) begin
          tx_valid   <= 1'b1;
          tx_sample  <= smp;
          data_start <= (pos == 14'(DATA0));
          post_tx    <= (pos == 14'(MY_POST + CP_LEN));
          underrun   <= in_data && fifo_empty;
          if (pos == 14'(PKT_LEN - 1)) begin
            active <= 1'b0; pkt_done <= 1'b1;
          end else begin
            pos <= pos + 1'b1;
          end
        end else begin
          tx_valid <= 1'b0; tx_sample <= '0;
        end
      end
    end
  end
endmodule
