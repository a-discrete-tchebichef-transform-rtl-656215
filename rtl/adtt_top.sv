// adtt_top: the approximate 8-point DTT transform pair.
//
// The design holds the forward core (adtt_fwd, X = T* x, the 20-adder
// multiplication-free transform that the paper realises in hardware) and
// the inverse core (adtt_inv, y = T1 X) side by side. Each has its own
// valid-qualified stream, accepts one 8-point vector per clock and answers
// 3 cycles later; the two may run at the same time and do not interact.
// The inverse core takes coefficients of the forward core's output width,
// so coefficients produced by fwd_X (after whatever quantisation a codec
// applies outside this design) fit inv_X. The diagonal scalings D* and D1
// of the paper are not in this design: like the paper, it leaves them to a
// quantiser and dequantiser.
//
// W_PIX is the width of the forward input samples (8, for level-shifted
// 8-bit pixels); fwd_X and inv_X are W_PIX+3 bits and inv_y W_PIX+7 bits.
// Putting both directions in one top is this design's choice; the paper
// reports the forward 1-D core alone.
module adtt_top
  import adtt_pkg::*;
#(
  parameter int unsigned W_PIX = 8
) (
  input  logic                                         clk,
  input  logic                                         rst_n,
  // Forward transform stream.
  input  logic                                         fwd_in_valid,
  input  logic signed [W_PIX-1:0]                      fwd_x [N],
  output logic                                         fwd_out_valid,
  output logic signed [W_PIX+FWD_GROWTH-1:0]           fwd_X [N],
  // Inverse transform stream.
  input  logic                                         inv_in_valid,
  input  logic signed [W_PIX+FWD_GROWTH-1:0]           inv_X [N],
  output logic                                         inv_out_valid,
  output logic signed [W_PIX+FWD_GROWTH+INV_GROWTH-1:0] inv_y [N]
);

  adtt_fwd #(.W_IN(W_PIX)) u_fwd (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (fwd_in_valid),
    .x         (fwd_x),
    .out_valid (fwd_out_valid),
    .X         (fwd_X)
  );

  adtt_inv #(.W_IN(W_PIX + FWD_GROWTH)) u_inv (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (inv_in_valid),
    .X         (inv_X),
    .out_valid (inv_out_valid),
    .y         (inv_y)
  );

endmodule
