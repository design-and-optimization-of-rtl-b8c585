// linear_svm: bespoke, fully-parallel digital linear SVM binary classifier.
//
// Computes f(x) = sign(w'x + b) for one pair of classes. Every quantised
// feature is multiplied by its own hardwired weight, all products are formed
// at once and summed by a balanced adder tree, the hardwired bias is added
// and the sign of the score is the one-bit output. Weights and bias are
// parameters, so synthesis folds them into the multipliers: a zero weight
// removes its multiplier and a power-of-two weight leaves only wiring.
//
// Structure (products, adder tree, bias add, sign, no memory, no clock)
// follows the source design. Own choices: 8-bit signed weights, a 16-bit
// signed bias in the same fixed-point scale as the products, and the
// convention that a score >= 0 gives out = 1 (the second class of the pair,
// c_j, wins) and a negative score gives out = 0 (c_i wins).
//
// Interface: x carries N_IN unsigned FEAT_W-bit feature codes from the
// ADCs; out is the classifier bit; score exposes the signed margin.
// Timing: purely combinational.
module linear_svm #(
  parameter int unsigned N_IN   = svm_pkg::MAX_FEATURES,
  parameter int unsigned FEAT_W = svm_pkg::FEAT_W,
  parameter int unsigned W_W    = svm_pkg::WEIGHT_W,
  parameter int unsigned B_W    = svm_pkg::BIAS_W,
  // Example coefficients (w4..w0, bias); every instance sets its own.
  parameter logic signed [N_IN-1:0][W_W-1:0] WEIGHTS = {-8'sd8, 8'sd0, 8'sd64, -8'sd3, 8'sd21},
  parameter logic signed [B_W-1:0]           BIAS    = -16'sd380,
  localparam int unsigned PROD_W  = FEAT_W + W_W + 1,
  localparam int unsigned TREE_W  = PROD_W + ((N_IN <= 1) ? 0 : $clog2(N_IN)),
  localparam int unsigned SCORE_W = ((TREE_W > B_W) ? TREE_W : B_W) + 1
) (
  input  logic [N_IN-1:0][FEAT_W-1:0] x,
  output logic signed [SCORE_W-1:0]   score,
  output logic                        out
);

  logic signed [N_IN-1:0][PROD_W-1:0] products;
  logic signed [TREE_W-1:0]           tree_sum;

  // Multipliers: unsigned feature code times signed hardwired weight.
  always_comb begin
    for (int i = 0; i < int'(N_IN); i++)
      products[i] = PROD_W'(signed'({1'b0, x[i]}) * signed'(WEIGHTS[i]));
  end

  adder_tree #(
    .N   (N_IN),
    .IN_W(PROD_W)
  ) u_tree (
    .operands(products),
    .sum     (tree_sum)
  );

  // Bias addition and sign evaluation.
  always_comb begin
    score = SCORE_W'(tree_sum) + SCORE_W'(BIAS);
    out   = ~score[SCORE_W-1];
  end

endmodule
