// amplitude_averaging: per end node, averages the amplitudes of the node's
// pilot subcarriers over a packet and turns the average into the overall
// amplitude scaling factor that the relay feeds back.
//
// Input is the frequency-domain stream of the packet's data OFDM symbols
// (bin index, node ownership is decided here from the pilot position: node A
// owns k' = +-21, node B k' = +-7). |pilot| comes from a vectoring CORDIC;
// sum and count are kept per node. On pkt_end the factor
//   scale = TARGET / (sum / count) = TARGET * count / sum      (Q4.12)
// is produced by one serial division, sum and count are cleared, and
// amp_valid pulses with the node and the factor (pkt_end is first delayed 17 clocks so that pilots still in the CORDIC
// are counted; the factor comes about 65 clocks after pkt_end).
// A node whose power is below TARGET gets scale > 1.0 and vice versa; the
// end node multiplies its overall gain by it, which balances the two
// nodes' receive powers at the relay. A node without pilot samples in the
// packet gets 1.0 (no change).
//
// Follows the paper: pilot amplitudes averaged into one factor per node for
// feedback. Own choices: where the pilot values come from (the frequency
// domain stream of the data symbols), the pilot assignment, and TARGET.
module amplitude_averaging
  import pnc_pkg::*;
#(
  parameter int unsigned TARGET = 2048   // wanted mean pilot amplitude
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        fd_valid,
  input  logic [5:0]  fd_bin,
  input  logic signed [22:0] fd_re,
  input  logic signed [22:0] fd_im,
  input  logic        pkt_end,
  output logic        amp_valid,
  output node_e       amp_node,
  output logic [15:0] amp_scale     // Q4.12
);
  logic        c_ov;
  logic signed [23:0] c_x, c_y;
  phase_t      c_z;
  logic [0:0]  c_tag;
  logic        is_pa, is_pb;
  always_comb begin
    is_pa = is_own_pilot(kprime(int'(fd_bin)), NODE_A);
    is_pb = is_own_pilot(kprime(int'(fd_bin)), NODE_B);
  end

  cordic #(.W(23), .ITER(15), .VECTOR(1'b1), .TAG_W(1)) u_mag (
    .clk, .rst_n, .in_valid(fd_valid && (is_pa || is_pb)), .x_i(fd_re), .y_i(fd_im),
    .z_i('0), .tag_i(is_pb), .out_valid(c_ov), .x_o(c_x), .y_o(c_y), .z_o(c_z), .tag_o(c_tag));

  // pkt_end is delayed by the CORDIC latency so the last pilots are counted
  logic [16:0] end_d;
  logic        end_q;
  always_comb end_q = end_d[16];

  logic [39:0] sum [2];
  logic [15:0] cnt [2];

  typedef enum logic [1:0] {S_IDLE, S_DIV_A, S_DIV_B} st_e;
  st_e st;
  logic        d_start, d_busy, d_done;
  logic [47:0] d_num, d_q;
  logic [39:0] s_hold [2];
  logic [15:0] c_hold [2];
  logic [31:0] den;
  logic        cur;
  // scale = TARGET*count*4096 / sum; the sum of one packet's pilot
  // magnitudes stays below 2**32 (200 pilots of at most 2**23).
  logic [47:0] num_c;
  always_comb begin
    num_c = 48'(TARGET) * 48'(c_hold[cur]) << 12;
    den   = s_hold[cur][31:0];
  end

  serial_divider #(.NW(48), .DW(32)) u_div (
    .clk, .rst_n, .start(d_start), .num(d_num), .den(den),
    .busy(d_busy), .done(d_done), .quot(d_q));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sum[0] <= '0; sum[1] <= '0; cnt[0] <= '0; cnt[1] <= '0;
      s_hold[0] <= '0; s_hold[1] <= '0; c_hold[0] <= '0; c_hold[1] <= '0;
      st <= S_IDLE; d_start <= 1'b0; d_num <= '0; cur <= 1'b0; end_d <= '0;
      amp_valid <= 1'b0; amp_node <= NODE_A; amp_scale <= '0;
    end else begin
      d_start <= 1'b0; amp_valid <= 1'b0;
      end_d <= {end_d[15:0], pkt_end};
      if (c_ov) begin
        sum[c_tag] <= sum[c_tag] + 40'(unsigned'(c_x[23] ? 24'd0 : c_x));
        cnt[c_tag] <= cnt[c_tag] + 1'b1;
      end
      unique case (st)
        S_IDLE: if (end_q) begin
          s_hold[0] <= sum[0]; s_hold[1] <= sum[1];
          c_hold[0] <= cnt[0]; c_hold[1] <= cnt[1];
          sum[0] <= '0; sum[1] <= '0; cnt[0] <= '0; cnt[1] <= '0;
          cur <= 1'b0; st <= S_DIV_A;
        end
        S_DIV_A, S_DIV_B: begin
          if (!d_busy && !d_start && !d_done) begin
            d_num <= num_c; d_start <= 1'b1;
          end
          if (d_done) begin
            amp_valid <= 1'b1;
            amp_node  <= cur ? NODE_B : NODE_A;
            amp_scale <= (c_hold[cur] == 0) ? 16'h1000 :
                         (d_q > 48'hffff) ? 16'hffff : d_q[15:0];
            if (st == S_DIV_A) begin cur <= 1'b1; st <= S_DIV_B; end
            else               st <= S_IDLE;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
