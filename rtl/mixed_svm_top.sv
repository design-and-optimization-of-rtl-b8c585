// mixed_svm_top: mixed-kernel, mixed-signal one-vs-one SVM classifier.
//
// A K-class problem is split into K(K-1)/2 binary classifiers, one per pair
// of classes. Each pair is given either a digital linear kernel or an analog
// RBF kernel (KERNEL_MAP, decided offline per pair by comparing the accuracy
// of a linear and an RBF classifier trained on that pair):
//   * linear pairs (linear_svm) read the 4-bit codes of the sensor inputs,
//     produced by one ADC per input and shared by all linear pairs;
//   * RBF pairs (rbf_classifier) compute directly on the sensor voltages and
//     end in a comparator, so they deliver a digital bit without an ADC.
// The bits of all pairs go to the decision encoder (ovo_encoder), which maps
// them to the class label. Everything works in parallel and there is no
// clock, register or controller: a new label follows every input change.
//
// Follows the source design: the partition (linear = digital behind ADCs,
// RBF = analog on the raw inputs, encoder in digital), 4-bit features, up to
// five inputs, three classes. The default KERNEL_MAP is the three-class
// example of the source (pair 0 vs 1 linear, 0 vs 2 RBF, 1 vs 2 linear).
// Own choices: M = 4 support vectors per RBF pair, the example weights and
// biases below (the source publishes no trained model), and all analog
// reference voltages (support vectors, alpha controls) and labels y of the
// RBF pairs as ports, since the source does not say how they are produced.
// Ports of pairs that are linear are left unused.
//
// Pair p is numbered as in svm_pkg: (0,1), (0,2), (1,2) for three classes.
// Bit p = 1 means the pair's second class won.
module mixed_svm_top #(
  parameter int unsigned N_CLASSES = svm_pkg::N_CLASSES,
  parameter int unsigned N_IN      = svm_pkg::MAX_FEATURES,
  parameter int unsigned M         = 4,
  localparam int unsigned N_PAIRS  = svm_pkg::n_pairs(N_CLASSES),
  localparam int unsigned CLS_W    = svm_pkg::class_w(N_CLASSES),
  localparam int unsigned FEAT_W   = svm_pkg::FEAT_W,
  localparam int unsigned W_W      = svm_pkg::WEIGHT_W,
  localparam int unsigned B_W      = svm_pkg::BIAS_W,
  // Bit p: kernel of pair p (svm_pkg::KERNEL_LINEAR or KERNEL_RBF).
  parameter logic [N_PAIRS-1:0] KERNEL_MAP = 3'b010,
  // Hardwired weights and biases of the linear pairs (entries of RBF pairs
  // are ignored). Example values; pair 0 first in the lowest bits.
  parameter logic signed [N_PAIRS-1:0][N_IN-1:0][W_W-1:0] LIN_WEIGHTS = {
    // pair 2 (1 vs 2): w4..w0
    8'sd0,  -8'sd16,  8'sd12,  8'sd4,   8'sd32,
    // pair 1 (0 vs 2): RBF in the default map, unused
    8'sd0,   8'sd0,   8'sd0,   8'sd0,   8'sd0,
    // pair 0 (0 vs 1): w4..w0
    -8'sd8,  8'sd0,   8'sd64, -8'sd3,   8'sd21
  },
  parameter logic signed [N_PAIRS-1:0][B_W-1:0] LIN_BIAS = {
    -16'sd500, 16'sd0, -16'sd380
  }
) (
  input  real                          v_in      [N_IN],          // sensor voltages, volts
  input  real                          rbf_vs    [N_PAIRS][M][N_IN], // support-vector voltages
  input  real                          rbf_va_p  [N_PAIRS][M],    // alpha control, + side
  input  real                          rbf_va_n  [N_PAIRS][M],    // alpha control, - side
  input  logic [N_PAIRS-1:0][M-1:0]    rbf_y,                     // labels, 1 = +1
  output logic [N_IN-1:0][FEAT_W-1:0]  features,                  // ADC codes
  output logic [N_PAIRS-1:0]           pair_bits,                 // classifier bits
  output logic [CLS_W-1:0]             label                      // predicted class
);

  // One ADC per sensor input, shared by every linear classifier.
  for (genvar i = 0; i < int'(N_IN); i++) begin : g_adc
    adc #(.BITS(FEAT_W)) u_adc (
      .vin (v_in[i]),
      .code(features[i])
    );
  end

  for (genvar p = 0; p < int'(N_PAIRS); p++) begin : g_pair
    if (KERNEL_MAP[p] == svm_pkg::KERNEL_RBF) begin : g_rbf
      real i_pos, i_neg;
      rbf_classifier #(
        .M(M),
        .D(N_IN)
      ) u_rbf (
        .vx   (v_in),
        .vs   (rbf_vs[p]),
        .va_p (rbf_va_p[p]),
        .va_n (rbf_va_n[p]),
        .y    (rbf_y[p]),
        .i_pos(i_pos),
        .i_neg(i_neg),
        .out  (pair_bits[p])
      );
    end else begin : g_lin
      logic signed [FEAT_W + W_W + 1 + $clog2(N_IN) + 1 - 1:0] score;
      linear_svm #(
        .N_IN   (N_IN),
        .FEAT_W (FEAT_W),
        .W_W    (W_W),
        .B_W    (B_W),
        .WEIGHTS(LIN_WEIGHTS[p]),
        .BIAS   (LIN_BIAS[p])
      ) u_lin (
        .x    (features),
        .score(score),
        .out  (pair_bits[p])
      );
    end
  end

  ovo_encoder #(.N_CLASSES(N_CLASSES)) u_enc (
    .bits (pair_bits),
    .label(label)
  );

endmodule
