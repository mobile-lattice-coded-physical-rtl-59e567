// tb_pnc_top: end-to-end test of the channel-aligned PNC uplink at full size
// (default parameters: 1 ms slots of 20000 samples, 100-symbol packets).
//
// Both end-node transmitters and the relay receiver run from one 160 MHz
// clock with a 20 MHz sample tick (one tick per 8 clocks). The testbench is
// the radio channel: each node's DAC output is scaled back to 16 bits,
// multiplied by a complex gain, rotated by the node's CFO and delayed by a
// whole number of samples; the two are summed with a little noise into the
// relay ADC. Node B starts 7 samples later than node A. The testbench also
// plays the relay's data receiver for the amplitude loop: it takes the pilot
// bins of the first data symbols (a DFT of the received samples) and feeds
// them to the relay's frequency-domain input, then pulses pkt_end.
// Checks, per packet:
//  - four LTS labels in the order pre A, pre B, post A, post B;
//  - the fed-back CFO of each node against the channel's CFO (the rotation
//    between preamble and postamble is above one turn, so this also checks
//    the whole-turn recovery);
//  - from the second packet on, each node's data as seen at the relay
//    (noise-free DFT of its own channel output, FFT window in node A's
//    timing as the relay uses it) divided by the lattice symbols sent: the
//    phase must be zero on every data subcarrier (within 0.1 turn), i.e. the precoding has
//    removed channel phase, CFO, B's arrival offset and the phase ramp of
//    B's slot advances; from the third
//    packet on, the two nodes' amplitudes must match within 12 %.
//  - the slot offset seen by the relay must shrink to within 2 samples.
// Mechanism counters (each must be non-zero): slot advance applied, CFO
// whole turns recovered, producer stalls on a full FIFO, feedback applied,
// aligned packets.
`timescale 1ns/1ps
module tb_pnc_top;
  import pnc_pkg::*;

  localparam int DIV    = 8;
  localparam int NSLOT  = 6;
  localparam int NSMP   = NSLOT * int'(SLOT_LEN) + 4000;
  localparam int DLY_A  = 3;
  localparam int DLY_B  = 10;
  localparam real PI2   = 6.283185307179586;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #3.125 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // ---------------- DUT ----------------
  logic        smp_tick, beacon, adc_valid;
  cplx_t       adc_rx;
  logic [23:0] threshold;
  cfo_t        rough_a, rough_b;
  logic        fd_valid, pkt_end;
  logic [5:0]  fd_bin;
  logic signed [22:0] fd_re, fd_im;
  node_e       rd_node, tbl_node, enc_node;
  logic [5:0]  rd_bin;
  phase_t      rd_phase;
  logic [15:0] rd_mag;
  logic        cal_we, dnph_we, rho_we, dnamp_we, enc_we;
  logic [12:0] enc_addr;
  cplx_t       enc_data;
  logic signed [11:0] dai, daq, dbi, dbq;
  logic        tx_en_a, tx_en_b;
  logic        fb_valid_a, fb_valid_b, adj_req_a, adj_req_b;
  feedback_t   fb_a, fb_b;
  logic signed [15:0] slot_offset;
  logic        peak_valid, pre_ind, post_ind;
  node_e       node_ind;
  logic [31:0] peak_time;
  logic [1:0]  start_tx, adj_pulse, post_tx, pkt_done, stall, underrun, wrap_fix;
  logic [5:0]  d_total_a, d_total_b;

  pnc_top dut (
    .clk, .rst_n, .smp_tick, .beacon, .adc_valid, .adc_rx, .threshold,
    .rough_cfo_a(rough_a), .rough_cfo_b(rough_b),
    .fd_valid, .fd_bin, .fd_re, .fd_im, .pkt_end, .rd_node, .rd_bin, .rd_phase, .rd_mag,
    .tbl_node, .cal_we, .cal_k(6'd0), .cal_val(16'd0), .dnph_we, .dnph_k(6'd0), .dnph_val(16'd0),
    .rho_we, .rho_k(6'd0), .rho_val(16'h1000), .dnamp_we, .dnamp_k(6'd0), .dnamp_val(16'h1000),
    .enc_node, .enc_we, .enc_addr, .enc_data,
    .dac_a_i(dai), .dac_a_q(daq), .tx_en_a, .dac_b_i(dbi), .dac_b_q(dbq), .tx_en_b,
    .fb_valid_a, .fb_a, .fb_valid_b, .fb_b, .adj_req_a, .adj_req_b, .slot_offset,
    .peak_valid, .pre_ind, .post_ind, .node_ind, .peak_time,
    .start_tx, .adj_pulse, .post_tx, .pkt_done, .stall, .underrun, .wrap_fix,
    .d_total_a, .d_total_b);

  // ---------------- channel ----------------
  real g_re [2], g_im [2], cfo_t_s [2];     // gain, CFO in turns per sample
  cplx_t enc [2][N_CW*CW_LEN];
  real ya_re [NSMP], ya_im [NSMP], yb_re [NSMP], yb_im [NSMP];
  int  start_at [2][NSLOT+1];               // relay sample where a packet begins
  int  npkt [2];
  int  d_at [2][NSLOT+1];                   // node's advance total for that packet
  int  n = 0;                               // relay sample index
  real dl_re [2][16], dl_im [2][16];
  bit  dl_en [2][16];
  bit  en_prev [2];

  logic [2:0] div;
  always_ff @(posedge clk) begin
    if (!rst_n) div <= '0; else div <= (div == 3'(DIV - 1)) ? '0 : div + 1'b1;
  end
  assign smp_tick = rst_n && div == 3'd0;

  // ADC sample: computed at the tick from the DAC values, presented 2 clocks later
  cplx_t adc_next;
  logic  adc_p1;
  always @(posedge clk) begin
    adc_p1    <= smp_tick;
    adc_valid <= adc_p1;
    if (adc_p1) adc_rx <= adc_next;
  end

  always @(posedge clk) if (smp_tick && n < NSMP) begin
    real xr, xi, cr, ci, ph, sr, si, nr;
    bit en;
    for (int nd = 0; nd < 2; nd++) begin
      xr = 16.0 * ((nd == 0) ? real'(dai) : real'(dbi));
      xi = 16.0 * ((nd == 0) ? real'(daq) : real'(dbq));
      en = (nd == 0) ? tx_en_a : tx_en_b;
      ph = PI2 * cfo_t_s[nd] * real'(n);
      cr = g_re[nd] * $cos(ph) - g_im[nd] * $sin(ph);
      ci = g_re[nd] * $sin(ph) + g_im[nd] * $cos(ph);
      for (int i = 15; i > 0; i--) begin
        dl_re[nd][i] = dl_re[nd][i-1]; dl_im[nd][i] = dl_im[nd][i-1]; dl_en[nd][i] = dl_en[nd][i-1];
      end
      dl_re[nd][0] = xr * cr - xi * ci;
      dl_im[nd][0] = xr * ci + xi * cr;
      dl_en[nd][0] = en;
    end
    ya_re[n] = dl_re[0][DLY_A]; ya_im[n] = dl_im[0][DLY_A];
    yb_re[n] = dl_re[1][DLY_B]; yb_im[n] = dl_im[1][DLY_B];
    for (int nd = 0; nd < 2; nd++) begin
      en = dl_en[nd][(nd == 0) ? DLY_A : DLY_B];
      if (en && !en_prev[nd] && npkt[nd] <= NSLOT) begin
        start_at[nd][npkt[nd]] = n;
        d_at[nd][npkt[nd]] = (nd == 0) ? int'(d_total_a) : int'(d_total_b);
        npkt[nd]++;
      end
      en_prev[nd] = en;
    end
    nr = real'($urandom_range(40)) - 20.0;
    sr = ya_re[n] + yb_re[n] + nr;
    nr = real'($urandom_range(40)) - 20.0;
    si = ya_im[n] + yb_im[n] + nr;
    adc_next.re = sat16(48'($rtoi(sr)));
    adc_next.im = sat16(48'($rtoi(si)));
    n++;
  end

  // DFT bin k of 64 samples from start s of a node's (or the summed) signal
  task automatic dft(input int which, input int s, input int k, output real yr, output real yi);
    real a, xr, xi;
    yr = 0.0; yi = 0.0;
    for (int m = 0; m < 64; m++) begin
      if (which == 0)      begin xr = ya_re[s+m]; xi = ya_im[s+m]; end
      else if (which == 1) begin xr = yb_re[s+m]; xi = yb_im[s+m]; end
      else begin xr = ya_re[s+m] + yb_re[s+m]; xi = ya_im[s+m] + yb_im[s+m]; end
      a = -PI2 * real'(k * m) / 64.0;
      yr += xr * $cos(a) - xi * $sin(a);
      yi += xr * $sin(a) + xi * $cos(a);
    end
  endtask

  function automatic real wrap1(input real t);
    real r;
    r = t - $floor(t);
    return (r >= 0.5) ? r - 1.0 : r;
  endfunction

  // ---------------- label order ----------------
  int lab_cnt = 0, lab_ok = 0;
  always @(posedge clk) if (rst_n && peak_valid) begin
    bit ok;
    case (lab_cnt % 4)
      0: ok = pre_ind && node_ind == NODE_A;
      1: ok = pre_ind && node_ind == NODE_B;
      2: ok = post_ind && node_ind == NODE_A;
      default: ok = post_ind && node_ind == NODE_B;
    endcase
    check(ok, $sformatf("label %0d wrong (pre=%0b post=%0b node=%0d)", lab_cnt, pre_ind, post_ind, node_ind));
    if (ok) lab_ok++;
    lab_cnt++;
  end

  // ---------------- feedback ----------------
  int n_fb = 0, n_turns = 0, n_adj = 0, n_stall = 0, n_wrapfix = 0, n_aligned = 0, n_underrun = 0;
  always @(posedge clk) if (rst_n) begin
    if (fb_valid_a || fb_valid_b) begin
      cfo_t c;
      real want, got;
      int nd;
      nd = fb_valid_a ? 0 : 1;
      c = fb_valid_a ? fb_a.cfo : fb_b.cfo;
      got = real'(c) / 4294967296.0;
      want = cfo_t_s[nd];
      check((got - want) < 1.0e-6 && (want - got) < 1.0e-6,
            $sformatf("node %0d CFO %e, channel %e", nd, got, want));
      n_fb++;
      $display("feedback node %0d: amp %h off %0d ph %h %h", nd, fb_valid_a ? fb_a.amp : fb_b.amp,
               fb_valid_a ? fb_a.off : fb_b.off, fb_valid_a ? fb_a.ph_k1 : fb_b.ph_k1, fb_valid_a ? fb_a.ph_k2 : fb_b.ph_k2);
      if (dut.u_relay.u_cfo.turns != 0) n_turns++;
    end
    if (adj_pulse != 0) n_adj++;
    if (stall != 0) n_stall++;
    if (wrap_fix != 0) n_wrapfix++;
    if (underrun != 0) n_underrun++;
  end

  // ---------------- amplitude loop: pilots to the relay ----------------
  int fed [2];
  task automatic feed_pilots(input int p);
    int s0, kp;
    real yr, yi;
    s0 = start_at[0][p] + int'(PRE_LEN) + int'(CP_LEN);
    for (int s = 0; s < 10; s++) begin
      foreach (kp_list[i]) begin
        kp = kp_list[i];
        dft(2, s0 + s * int'(SYM_LEN), bin_of(kp), yr, yi);
        @(negedge clk);
        fd_valid = 1'b1; fd_bin = 6'(bin_of(kp));
        fd_re = 23'($rtoi(yr / 4.0)); fd_im = 23'($rtoi(yi / 4.0));
      end
    end
    @(negedge clk); fd_valid = 1'b0;
    pkt_end = 1'b1;
    @(negedge clk); pkt_end = 1'b0;
  endtask
  int kp_list [4] = '{21, -21, 7, -7};

  // ---------------- data alignment check ----------------
  real amp_n [2];
  task automatic check_packet(input int nd, input int p);
    int s0, kp, j, d;
    real yr, yi, xr, xi, den, rr, ri, ph, want, err, merr, msum;
    cplx_t x;
    // the relay combines both nodes in node A's timing
    s0 = start_at[0][p] + int'(PRE_LEN) + int'(CP_LEN);
    d  = d_at[nd][p];
    merr = 0.0; msum = 0.0;
    for (int s = 0; s < int'(N_SYMS); s += 33) begin
      j = 0;
      for (int k = 0; k < 64; k++) begin
        kp = kprime(k);
        if (is_data(kp)) begin
          x = enc[nd][s * int'(N_DATA_SC) + j];
          j++;
          dft(nd, s0 + s * int'(SYM_LEN), k, yr, yi);
          xr = real'(x.re); xi = real'(x.im);
          den = xr * xr + xi * xi;
          rr = (yr * xr + yi * xi) / den;
          ri = (yi * xr - yr * xi) / den;
          ph = $atan2(ri, rr) / PI2;
          want = 0.0;
          err = wrap1(ph - want);
          if (err < 0) err = -err;
          if (err > merr) merr = err;
          msum += $sqrt(rr * rr + ri * ri);
        end
      end
    end
    amp_n[nd] = msum;
    $display("node %0d packet %0d: D=%0d worst phase error %f turn, amplitude sum %f", nd, p, d, merr, msum);
    check(merr < 0.1, $sformatf("node %0d packet %0d phase not aligned (%f turn)", nd, p, merr));
    if (merr < 0.1) n_aligned++;
  endtask

  // ---------------- stimulus ----------------
  initial begin
    real ga, gb;
    beacon = 1'b0; fd_valid = 1'b0; pkt_end = 1'b0; fd_bin = '0; fd_re = '0; fd_im = '0;
    rd_node = NODE_A; rd_bin = '0; tbl_node = NODE_A; enc_node = NODE_A;
    cal_we = 1'b0; dnph_we = 1'b0; rho_we = 1'b0; dnamp_we = 1'b0; enc_we = 1'b0;
    enc_addr = '0; enc_data = '0; threshold = 24'd150000;
    for (int nd = 0; nd < 2; nd++) begin
      npkt[nd] = 0; en_prev[nd] = 1'b0; fed[nd] = 0;
      for (int i = 0; i < 16; i++) begin dl_re[nd][i] = 0.0; dl_im[nd][i] = 0.0; dl_en[nd][i] = 1'b0; end
    end
    adc_rx = '0; adc_next = '0;
    // channel: A gain 0.9 at 40 deg, B gain 0.6 at -110 deg; CFO +3 kHz / -2.2 kHz
    ga = 0.9; gb = 0.6;
    g_re[0] = ga * $cos(PI2 * 40.0 / 360.0);  g_im[0] = ga * $sin(PI2 * 40.0 / 360.0);
    g_re[1] = gb * $cos(-PI2 * 110.0 / 360.0); g_im[1] = gb * $sin(-PI2 * 110.0 / 360.0);
    cfo_t_s[0] = 3000.0 / 20.0e6;
    cfo_t_s[1] = -2200.0 / 20.0e6;
    rough_a = cfo_t'($rtoi(cfo_t_s[0] * 1.03 * 4294967296.0));
    rough_b = cfo_t'($rtoi(cfo_t_s[1] * 0.97 * 4294967296.0));
    // lattice symbols (16-QAM points, +-1 / +-3 times 4000)
    for (int nd = 0; nd < 2; nd++)
      for (int i = 0; i < int'(N_CW * CW_LEN); i++) begin
        enc[nd][i].re = 16'(($urandom_range(3) * 2 - 3) * 4000);
        enc[nd][i].im = 16'(($urandom_range(3) * 2 - 3) * 4000);
      end
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    // lattice encoder fills both buffers
    for (int nd = 0; nd < 2; nd++)
      for (int i = 0; i < int'(N_CW * CW_LEN); i++) begin
        @(negedge clk);
        enc_we = 1'b1; enc_node = nd ? NODE_B : NODE_A; enc_addr = 13'(i); enc_data = enc[nd][i];
      end
    @(negedge clk); enc_we = 1'b0;
    repeat (100) @(negedge clk);
    beacon = 1'b1; @(negedge clk); beacon = 1'b0;
  end

  // per packet work at the relay
  initial begin
    int p;
    p = 0;
    wait (rst_n);
    while (p < NSLOT - 1) begin
      // pilots once A's data of packet p has arrived
      wait (npkt[0] > p && npkt[1] > p && n >= start_at[0][p] + int'(PRE_LEN + 10 * SYM_LEN) + 8);
      feed_pilots(p);
      wait (n >= start_at[1][p] + int'(PKT_LEN) + 8);
      if (p >= 1) begin
        check_packet(0, p);
        check_packet(1, p);
        if (p >= 2) begin
          real r;
          r = amp_n[0] / amp_n[1];
          $display("amplitude ratio A/B %f", r);
          check(r > 0.88 && r < 1.12, $sformatf("packet %0d amplitudes differ, ratio %f", p, r));
        end
      end
      p++;
    end
    // slot offset converged
    $display("slot offset %0d, advances %0d, D_A=%0d D_B=%0d", slot_offset, n_adj, d_total_a, d_total_b);
    check(slot_offset <= 2 && slot_offset >= -2, $sformatf("slot offset %0d not within 2", slot_offset));
    check(lab_ok == 4 * (NSLOT - 1) || lab_ok >= 4 * (NSLOT - 1), $sformatf("only %0d labels", lab_ok));
    check(n_fb >= 2 * (NSLOT - 1) - 1, $sformatf("feedback count %0d", n_fb));
    check(n_underrun == 0, "FIFO underrun");
    // mechanisms
    $display("mechanisms: slot_advance=%0d cfo_turns=%0d fifo_stall=%0d feedback=%0d aligned=%0d wrap_fix=%0d",
             n_adj, n_turns, n_stall, n_fb, n_aligned, n_wrapfix);
    check(n_adj > 0, "slot advance never happened");
    check(n_turns > 0, "CFO whole-turn recovery never happened");
    check(n_stall > 0, "producer never stalled on the FIFO");
    check(n_fb > 0, "no feedback");
    check(n_aligned > 0, "no aligned packet");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #12ms;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
