// rbf_classifier: behavioural model of one analog RBF binary classifier.
// Not synthesizable logic: it models subthreshold analog circuits.
//
// Works directly on the sensor voltages. Each of the M support vectors has
// a branch (rbf_sv_branch) producing the non-negative current
// alpha_j * K(x_j, x). A switch set by the label y_j steers that current onto
// the positive rail (y_j = +1, coded 1) or the negative rail (y_j = -1, coded
// 0); each rail sums its currents passively, so
//   I_pos - I_neg = sum_j y_j alpha_j K(x_j, x),
// and the comparator turns the sign of that margin into the output bit.
// No bias current enters the rails: the source's circuit has none, so the
// offset b of the SVM decision function is not represented.
//
// Follows the source design: branches, y switches, two rails, comparator.
// Own choices: y as a logic input per support vector, support-vector and
// alpha-control voltages as input ports (the source does not say how these
// reference voltages are generated), out = 1 for a non-negative margin.
//
// Interface: vx (D feature voltages), vs (M x D support-vector voltages),
// va_p / va_n (alpha controls per support vector), y (labels); out is the
// classifier bit, i_pos / i_neg expose the rail currents.
// Timing: static model; the classifier has no clock.
module rbf_classifier #(
  parameter int unsigned M      = 4,
  parameter int unsigned D      = svm_pkg::MAX_FEATURES,
  parameter real         I_TAIL = 10.0e-9
) (
  input  real          vx   [D],
  input  real          vs   [M][D],
  input  real          va_p [M],
  input  real          va_n [M],
  input  logic [M-1:0] y,
  output real          i_pos,
  output real          i_neg,
  output logic         out
);

  real i_branch [M];
  real i_kernel [M];
  real v_bias   [M];

  for (genvar j = 0; j < int'(M); j++) begin : g_sv
    rbf_sv_branch #(
      .D     (D),
      .I_TAIL(I_TAIL)
    ) u_branch (
      .vx  (vx),
      .vs  (vs[j]),
      .va_p(va_p[j]),
      .va_n(va_n[j]),
      .ik  (i_kernel[j]),
      .ij  (i_branch[j]),
      .vb  (v_bias[j])
    );
  end

  // Label switches and passive summation on the two rails.
  always_comb begin
    i_pos = 0.0;
    i_neg = 0.0;
    for (int j = 0; j < int'(M); j++) begin
      if (y[j]) i_pos = i_pos + i_branch[j];
      else      i_neg = i_neg + i_branch[j];
    end
  end

  current_comparator u_cmp (
    .i_pos(i_pos),
    .i_neg(i_neg),
    .out  (out)
  );

endmodule
