// rbf_sv_branch: behavioural model of one support-vector branch of the
// analog RBF classifier. Not synthesizable logic: it models analog circuits.
//
// D Gaussian kernel cells are chained: the first takes the bias current set
// by transistor Q5 from the bias voltage V_b, and every later cell takes the
// output current of the one before as its tail current. The currents
// therefore multiply, giving a separable kernel over the D features,
//   I_out(D) = I_TAIL / 4^D * prod_d sech^2((V_x(d) - V_s(d)) / (2 n V_T)),
// which the alpha multiplier then scales by the dual coefficient alpha_j.
//
// V_b comes from the resistive divider R1 (10 MOhm, VDD side) and R2
// (4.28 MOhm, VSS side) of the source design, which at the 1 V analog supply
// gives V_b = 0.2997 V; the model reports it on vb. The Q5 current it
// produces depends on device data the source does not give, so the tail
// current I_TAIL is a parameter (own choice: 10 nA). Only ratios of currents
// reach the comparator, so I_TAIL does not change a decision.
//
// Interface: vx feature voltages, vs the support vector's voltages, va_p /
// va_n the alpha control voltages; ij is the branch current alpha_j*K_j(x)
// and ik the kernel current before the alpha multiplier (amperes).
// Timing: static (DC) model.
module rbf_sv_branch #(
  parameter int unsigned D      = svm_pkg::MAX_FEATURES,
  parameter real         I_TAIL = 10.0e-9,
  parameter real         VDD    = 1.0,
  parameter real         VSS    = 0.0,
  parameter real         R1     = 10.0e6,
  parameter real         R2     = 4.28e6
) (
  input  real vx [D],
  input  real vs [D],
  input  real va_p,
  input  real va_n,
  output real ik,
  output real ij,
  output real vb
);

  assign vb = VSS + (VDD - VSS) * R2 / (R1 + R2);

  // Kernel cell d takes the output of cell d-1 (cell 0 the bias current) as
  // its tail current.
  for (genvar d = 0; d < int'(D); d++) begin : g_cell
    real i_tail;
    real i_out;
    if (d == 0) begin : g_first
      assign i_tail = I_TAIL;
    end else begin : g_next
      assign i_tail = g_cell[d-1].i_out;
    end
    rbf_kernel_cell u_cell (
      .v1  (vx[d]),
      .v2  (vs[d]),
      .iin (i_tail),
      .iout(i_out)
    );
  end

  assign ik = g_cell[D-1].i_out;

  alpha_multiplier u_alpha (
    .iin (ik),
    .va_p(va_p),
    .va_n(va_n),
    .iout(ij)
  );

endmodule
