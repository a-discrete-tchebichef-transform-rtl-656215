// adtt_fwd: forward 8-point approximate discrete Tchebichef transform,
// X = T* x, with no multipliers and no shifts: 20 two-input adders.
//
// T* (rows k = 0..7, columns n = 0..7):
//   [ 1  1  1  1  1  1  1  1]
//   [-1 -1  0  0  0  0  1  1]
//   [ 1  0  0 -1 -1  0  0  1]
//   [-1  1  1  0  0 -1 -1  1]
//   [ 0 -1  0  1  1  0 -1  0]
//   [ 0  1 -1 -1  1  1 -1  0]
//   [ 0 -1  1  0  0  1 -1  0]
//   [ 0  0 -1  1 -1  1  0  0]
//
// How it works. As in the paper's signal flow graph, the first stage is a
// butterfly: a_n = x_n + x_(7-n) and b_n = x_n - x_(7-n), n = 0..3 (8 adders;
// the graph draws the minus signs as dashed arrows). The even outputs are
// built from the a's and the odd outputs from the b's:
//   X0 = (a0 + a3) + (a1 + a2)   X2 = a0 - a3   X4 = a3 - a1   X6 = a2 - a1
//   X1 = -b0 - b1                X7 = b3 - b2
//   X3 = (b1 - b0) + b2          X5 = b1 - (b2 + b3)
// which is 6 + 6 more adders, 20 in all, the count the paper gives. The
// paper's graph fixes the butterfly and the adder count; the grouping of
// the last 12 adders above is this design's own, read off the matrix. The
// graph lists its outputs in the order X0 X6 X4 X2 X7 X5 X3 X1; this core
// presents them in natural order X[0]..X[7].
//
// The scaling by d_k* that makes the transform orthogonal is not done here:
// like the paper, the design leaves it to the quantizer, so X is the
// unscaled T* x.
//
// Interface and timing. One vector x[0..7] of W_IN-bit two's-complement
// samples is accepted in every cycle in which in_valid is high; there is
// no back-pressure. Registers follow each of the three adder levels, so
// X and out_valid appear FWD_LATENCY = 3 cycles later, one vector per
// clock. Outputs are W_IN+3 bits wide, enough for every input without
// overflow. Word length, pipeline depth, the valid signal and the
// synchronous active-low reset (of the valid pipeline only) are this
// design's choices; the paper gives only the one-transform-per-clock
// throughput.
module adtt_fwd
  import adtt_pkg::*;
#(
  parameter int unsigned W_IN = 8
) (
  input  logic                                    clk,
  input  logic                                    rst_n,
  input  logic                                    in_valid,
  input  logic signed [W_IN-1:0]                  x [N],
  output logic                                    out_valid,
  output logic signed [W_IN+FWD_GROWTH-1:0]       X [N]
);

  localparam int unsigned W1 = W_IN + 1;  // after the butterfly
  localparam int unsigned W2 = W_IN + 2;  // after the second adder level
  localparam int unsigned W3 = W_IN + 3;  // outputs

  // Stage 1: input butterfly.
  logic signed [W1-1:0] a_q [4];
  logic signed [W1-1:0] b_q [4];

  // Stage 2: second adder level; odd-part operands that skip a level are
  // carried along (b1_q2, b2_q2).
  logic signed [W2-1:0] s03_q, s12_q;      // a0 + a3, a1 + a2
  logic signed [W2-1:0] x2_q, x4_q, x6_q;  // finished even outputs
  logic signed [W2-1:0] x1_q, x7_q;        // finished odd outputs
  logic signed [W2-1:0] t3_q;              // b1 - b0, for X3
  logic signed [W2-1:0] t5_q;              // b2 + b3, for X5
  logic signed [W1-1:0] b1_q2, b2_q2;

  // Stage 3: last adder level and output register.
  logic signed [W3-1:0] X_q [N];

  logic [FWD_LATENCY-1:0] vld_q;

  always_ff @(posedge clk) begin
    for (int n = 0; n < 4; n++) begin
      a_q[n] <= W1'(x[n]) + W1'(x[7-n]);
      b_q[n] <= W1'(x[n]) - W1'(x[7-n]);
    end
  end

  always_ff @(posedge clk) begin
    s03_q <= W2'(a_q[0]) + W2'(a_q[3]);
    s12_q <= W2'(a_q[1]) + W2'(a_q[2]);
    x2_q  <= W2'(a_q[0]) - W2'(a_q[3]);
    x4_q  <= W2'(a_q[3]) - W2'(a_q[1]);
    x6_q  <= W2'(a_q[2]) - W2'(a_q[1]);
    x1_q  <= -W2'(b_q[0]) - W2'(b_q[1]);
    x7_q  <= W2'(b_q[3]) - W2'(b_q[2]);
    t3_q  <= W2'(b_q[1]) - W2'(b_q[0]);
    t5_q  <= W2'(b_q[2]) + W2'(b_q[3]);
    b1_q2 <= b_q[1];
    b2_q2 <= b_q[2];
  end

  always_ff @(posedge clk) begin
    X_q[0] <= W3'(s03_q) + W3'(s12_q);
    X_q[1] <= W3'(x1_q);
    X_q[2] <= W3'(x2_q);
    X_q[3] <= W3'(t3_q) + W3'(b2_q2);
    X_q[4] <= W3'(x4_q);
    X_q[5] <= W3'(b1_q2) - W3'(t5_q);
    X_q[6] <= W3'(x6_q);
    X_q[7] <= W3'(x7_q);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) vld_q <= '0;
    else        vld_q <= {vld_q[FWD_LATENCY-2:0], in_valid};
  end

  assign X         = X_q;
  assign out_valid = vld_q[FWD_LATENCY-1];

endmodule
