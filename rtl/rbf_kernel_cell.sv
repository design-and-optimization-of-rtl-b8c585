// rbf_kernel_cell: behavioural model of one analog Gaussian kernel cell.
// Not synthesizable logic: it models a subthreshold transistor circuit.
//
// The circuit is two cascaded n-type differential pairs biased in
// subthreshold, (Q1,Q2) feeding (Q3,Q4), with a tail current I_in and a
// readout transistor Q6 mirroring the Q4 branch. With x = (V1 - V2)/(n*V_T)
// its output current is
//   I_out = I_in / ((1 + e^-x) * (1 + e^x)) = I_in/4 * sech^2(x/2),
// a bell that peaks at I_in/4 when V1 = V2 and, near the peak, equals
// I_in/4 * exp(-gamma*(V1-V2)^2) with gamma = 1/(4 n^2 V_T^2).
// The model returns the exact sech^2 expression; it ignores channel-length
// modulation and the readout ratio of Q6 to Q4.
//
// Follows the source design: the transfer function and the use of the
// output as the next stage's tail current. Own choice: the slope factor
// n = 1.5 (the source gives no value); V_T is kT/q at 300 K.
//
// Interface: v1 is the feature voltage V_x(d), v2 the support-vector
// voltage V_s(j,d), iin the tail current, iout the kernel current (amperes).
// Timing: static (DC) model; settling is not modelled.
module rbf_kernel_cell #(
  parameter real N_SLOPE = svm_pkg::N_SLOPE,
  parameter real V_T     = svm_pkg::V_THERMAL
) (
  input  real v1,
  input  real v2,
  input  real iin,
  output real iout
);

  always_comb begin
    real x;
    x    = (v1 - v2) / (N_SLOPE * V_T);
    iout = iin / ((1.0 + $exp(-x)) * (1.0 + $exp(x)));
  end

endmodule
