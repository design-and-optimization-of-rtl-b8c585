// alpha_multiplier: behavioural model of the analog dual-coefficient
// multiplier. Not synthesizable logic: it models a subthreshold circuit.
//
// A subthreshold differential pair (Q1,Q2) with diode-connected loads
// (Q3,Q4) takes the kernel current as its tail current and passes the
// fraction
//   alpha = 1 / (1 + exp(dV_alpha / (n*V_T))),  dV_alpha = V_alpha+ - V_alpha-
// of it to the output, so alpha lies in (0,1) and is set by a control
// voltage difference. A desired alpha maps to dV_alpha = n*V_T*ln(1/alpha-1)
// (the source fits an offset x0 and slope s to SPICE data; the model uses
// the ideal values x0 = 0, s = n*V_T).
//
// Follows the source design: the logistic law. Own choice: n = 1.5.
// Interface: iin kernel current in, va_p / va_n control voltages, iout the
// scaled current (amperes). Timing: static (DC) model.
module alpha_multiplier #(
  parameter real N_SLOPE = svm_pkg::N_SLOPE,
  parameter real V_T     = svm_pkg::V_THERMAL
) (
  input  real iin,
  input  real va_p,
  input  real va_n,
  output real iout
);

  always_comb begin
    iout = iin / (1.0 + $exp((va_p - va_n) / (N_SLOPE * V_T)));
  end

endmodule
