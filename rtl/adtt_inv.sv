// adtt_inv: inverse 8-point approximate discrete Tchebichef transform,
// y = T1 X, built from adders and fixed shifts only.
//
// The exact inverse of the forward matrix T* is T1 * D1 with
// D1 = diag(1/8, 1/10, 1/8, 1/10, 1/4, 1/10, 1/8, 1/10). As with the
// forward core, the diagonal factor (and the orthogonalising (D*)^-1) is
// left to the dequantizer, so this core computes the integer product T1 X:
//   [1 -3  3 -2  1 -1 -1 -1]
//   [1 -2 -1  2 -1  1 -1  1]
//   [1 -1 -1  1 -1 -2  3 -2]
//   [1 -1 -1  1  1 -2 -1  3]
//   [1  1 -1 -1  1  2 -1 -3]
//   [1  1 -1 -1 -1  2  3  2]
//   [1  2 -1 -2 -1 -1 -1 -1]
//   [1  3  3  2  1  1 -1  1]
// A consequence the test benches use: T* T1 = diag(8,10,8,10,4,10,8,10).
//
// How it works. The paper gives T1 and its cost (29 additions, 8 shifts)
// but not its signal flow graph; this factorisation is this design's own.
// The even columns of T1 are mirror-symmetric and the odd columns
// antisymmetric, so y_n = E_n + O_n and y_(7-n) = E_n - O_n (n = 0..3),
// with E from X0, X2, X4, X6 and O from X1, X3, X5, X7:
//   stage 1:  P = (X0 - X6) + X4,  M = (X0 - X6) - X4,
//             u = X3 - X1,  v = X5 + X7,  w = X1 + X3,  f = 4 X7 + X7
//   stage 2:  E0 = P + 2 X2 + X2,  E3 = P - X2,  E1 = M - X2,  E2 = E1 + 4 X6
//             O0 = -(X1 + 2 w + v),  O1 = 2 u + v,  O2 = u - 2 v,  O3 = O2 + f
//   stage 3:  the output butterfly.
// That is 25 adders and 6 shifts, fewer than the paper's count for its own
// (unpublished) graph.
//
// Interface and timing. One vector X[0..7] of W_IN-bit two's-complement
// coefficients, in natural order, is accepted in every cycle in which
// in_valid is high; there is no back-pressure. A register follows each
// stage, so y and out_valid appear INV_LATENCY = 3 cycles later, one
// vector per clock. Stages 1 and 2 hold up to two adders in series, twice
// the depth of the forward core's stages. All internal words and the outputs are W_IN+4 bits
// wide, enough for every input without overflow. Word length, pipeline
// depth, the valid signal and the synchronous active-low reset (of the
// valid pipeline only) are this design's choices.
module adtt_inv
  import adtt_pkg::*;
#(
  parameter int unsigned W_IN = 8 + FWD_GROWTH
) (
  input  logic                                    clk,
  input  logic                                    rst_n,
  input  logic                                    in_valid,
  input  logic signed [W_IN-1:0]                  X [N],
  output logic                                    out_valid,
  output logic signed [W_IN+INV_GROWTH-1:0]       y [N]
);

  localparam int unsigned WI = W_IN + INV_GROWTH;

  typedef logic signed [WI-1:0] word_t;

  // Inputs widened to the internal word.
  word_t xi [N];
  always_comb begin
    for (int k = 0; k < N; k++) xi[k] = WI'(X[k]);
  end

  // Stage 1.
  word_t m;
  assign m = xi[0] - xi[6];

  word_t p_q, m_q, u_q, v_q, w_q, f_q;
  word_t x1_q, x2_q, x6_q;

  always_ff @(posedge clk) begin
    p_q  <= m + xi[4];
    m_q  <= m - xi[4];
    u_q  <= xi[3] - xi[1];
    v_q  <= xi[5] + xi[7];
    w_q  <= xi[1] + xi[3];
    f_q  <= (xi[7] <<< 2) + xi[7];
    x1_q <= xi[1];
    x2_q <= xi[2];
    x6_q <= xi[6];
  end

  // Stage 2.
  word_t e1;
  assign e1 = m_q - x2_q;

  word_t o2;
  assign o2 = u_q - (v_q <<< 1);

  word_t e_q [4];
  word_t o_q [4];

  always_ff @(posedge clk) begin
    e_q[0] <= p_q + (x2_q <<< 1) + x2_q;
    e_q[1] <= e1;
    e_q[2] <= e1 + (x6_q <<< 2);
    e_q[3] <= p_q - x2_q;
    o_q[0] <= -(x1_q + (w_q <<< 1) + v_q);
    o_q[1] <= (u_q <<< 1) + v_q;
    o_q[2] <= o2;
    o_q[3] <= o2 + f_q;
  end

  // Stage 3: output butterfly.
  word_t y_q [N];

  always_ff @(posedge clk) begin
    for (int n = 0; n < 4; n++) begin
      y_q[n]   <= e_q[n] + o_q[n];
      y_q[7-n] <= e_q[n] - o_q[n];
    end
  end

  logic [INV_LATENCY-1:0] vld_q;

  always_ff @(posedge clk) begin
    if (!rst_n) vld_q <= '0;
    else        vld_q <= {vld_q[INV_LATENCY-2:0], in_valid};
  end

  assign y         = y_q;
  assign out_valid = vld_q[INV_LATENCY-1];

endmodule
