// cordic: pipelined CORDIC, one input per clock, ITER+2 cycles latency.
//
// VECTOR = 0 (rotation): outputs (x + j*y) * exp(j*2*pi*z), z in turns
//   (2**PW == one turn). Used to build A*exp(j*theta) and to rotate samples.
// VECTOR = 1 (vectoring): outputs x_o = |x + j*y|, y_o ~ 0 and
//   z_o = angle(x + j*y) in turns. Used for angle(.) and magnitudes.
//
// How: a pre-rotation by half a turn brings the vector/angle into the right
// half plane, then ITER micro-rotations by +-atan(2^-i) follow, one per
// pipeline stage; a final stage removes the CORDIC gain (x 0.60725, Q1.15).
// A TAG travels with each sample so callers can keep side information
// aligned. The CORDIC itself is a standard building block; the paper only
// names the operations (angle(.), A*e^{j*theta}, phase rotation).
module cordic
  import pnc_pkg::*;
#(
  parameter int unsigned W      = 24,   // input x/y width
  parameter int unsigned ITER   = 15,
  parameter bit          VECTOR = 1'b0,
  parameter int unsigned TAG_W  = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic signed [W-1:0]  x_i,
  input  logic signed [W-1:0]  y_i,
  input  logic [PW-1:0]        z_i,
  input  logic [TAG_W-1:0]     tag_i,
  output logic                 out_valid,
  output logic signed [W:0]    x_o,
  output logic signed [W:0]    y_o,
  output logic [PW-1:0]        z_o,
  output logic [TAG_W-1:0]     tag_o
);
  localparam int unsigned IW = W + 2;

  logic signed [IW-1:0] xs [ITER+1];
  logic signed [IW-1:0] ys [ITER+1];
  logic        [PW-1:0] zs [ITER+1];
  logic [TAG_W-1:0]     ts [ITER+1];
  logic                 vs [ITER+1];

  // stage 0: pre-rotation
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vs[0] <= 1'b0; xs[0] <= '0; ys[0] <= '0; zs[0] <= '0; ts[0] <= '0;
    end else begin
      vs[0] <= in_valid;
      ts[0] <= tag_i;
      if (!VECTOR) begin
        if (z_i[PW-1] != z_i[PW-2]) begin       // |angle| > quarter turn
          xs[0] <= -IW'(x_i); ys[0] <= -IW'(y_i); zs[0] <= z_i + {1'b1, {(PW-1){1'b0}}};
        end else begin
          xs[0] <= IW'(x_i);  ys[0] <= IW'(y_i);  zs[0] <= z_i;
        end
      end else begin
        if (x_i < 0) begin
          xs[0] <= -IW'(x_i); ys[0] <= -IW'(y_i); zs[0] <= {1'b1, {(PW-1){1'b0}}};
        end else begin
          xs[0] <= IW'(x_i);  ys[0] <= IW'(y_i);  zs[0] <= '0;
        end
      end
    end
  end

  // micro-rotation stages
  for (genvar i = 0; i < ITER; i++) begin : g_stage
    logic d;  // 1: rotate counter-clockwise
    always_comb d = VECTOR ? ys[i][IW-1] : ~zs[i][PW-1];
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        vs[i+1] <= 1'b0; xs[i+1] <= '0; ys[i+1] <= '0; zs[i+1] <= '0; ts[i+1] <= '0;
      end else begin
        vs[i+1] <= vs[i];
        ts[i+1] <= ts[i];
        if (d) begin
          xs[i+1] <= xs[i] - (ys[i] >>> i);
          ys[i+1] <= ys[i] + (xs[i] >>> i);
          zs[i+1] <= zs[i] - atan_turns(i);
        end else begin
          xs[i+1] <= xs[i] + (ys[i] >>> i);
          ys[i+1] <= ys[i] - (xs[i] >>> i);
          zs[i+1] <= zs[i] + atan_turns(i);
        end
      end
    end
  end

  // gain compensation
  logic signed [IW+16:0] xk, yk;
  always_comb begin
    xk = (xs[ITER] * 17'sd19898 + (1 <<< 14)) >>> 15;
    yk = (ys[ITER] * 17'sd19898 + (1 <<< 14)) >>> 15;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; x_o <= '0; y_o <= '0; z_o <= '0; tag_o <= '0;
    end else begin
      out_valid <= vs[ITER];
      x_o       <= xk[W:0];
      y_o       <= yk[W:0];
      // in vectoring mode the accumulated angle is the result
      z_o       <= VECTOR ? zs[ITER] : '0;
      tag_o     <= ts[ITER];
    end
  end
endmodule
