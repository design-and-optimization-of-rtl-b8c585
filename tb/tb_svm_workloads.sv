// tb_svm_workloads: the three evaluated three-class configurations of the
// mixed-kernel SVM, run side by side through svm_workload_runner:
//   balance    - 4 inputs, 1 RBF / 2 linear pairs (RBF on 0 vs 2)
//   seeds      - 5 selected inputs, 1 RBF / 2 linear pairs (RBF on 1 vs 2)
//   vertebral  - 5 selected inputs, 2 RBF / 1 linear pairs (RBF on 0 vs 1
//                and 1 vs 2)
// Input counts and RBF/linear ratios are those of the evaluated tasks; which
// pair is RBF, the coefficients and the analog settings are example values,
// since no trained model is published. The data are random stimuli, not the
// data sets.
module tb_svm_workloads;
  int c_bal, f_bal, c_see, f_see, c_ver, f_ver;
  logic d_bal, d_see, d_ver;

  svm_workload_runner #(
    .N_IN(4), .KERNEL_MAP(3'b010),
    .LIN_WEIGHTS({8'sd20, -8'sd20, 8'sd0, 8'sd16,   8'sd0, 8'sd0, 8'sd0, 8'sd0,   -8'sd16, 8'sd32, 8'sd0, 8'sd8}),
    .LIN_BIAS({-16'sd240, 16'sd0, -16'sd250})
  ) u_balance (.checks(c_bal), .failures(f_bal), .done(d_bal));

  svm_workload_runner #(
    .N_IN(5), .KERNEL_MAP(3'b100),
    .LIN_WEIGHTS({8'sd0, 8'sd0, 8'sd0, 8'sd0, 8'sd0,
                  8'sd9, -8'sd5, 8'sd11, -8'sd7, 8'sd3,
                  -8'sd4, 8'sd16, 8'sd2, 8'sd0, -8'sd12}),
    .LIN_BIAS({16'sd0, -16'sd120, -16'sd20})
  ) u_seeds (.checks(c_see), .failures(f_see), .done(d_see));

  svm_workload_runner #(
    .N_IN(5), .KERNEL_MAP(3'b101),
    .LIN_WEIGHTS({8'sd0, 8'sd0, 8'sd0, 8'sd0, 8'sd0,
                  8'sd8, 8'sd8, -8'sd16, 8'sd4, -8'sd2,
                  8'sd0, 8'sd0, 8'sd0, 8'sd0, 8'sd0}),
    .LIN_BIAS({16'sd0, 16'sd10, 16'sd0})
  ) u_vertebral (.checks(c_ver), .failures(f_ver), .done(d_ver));

  initial begin
    #1000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c_bal + c_see + c_ver, f_bal + f_see + f_ver + 1);
    $finish;
  end

  initial begin
    wait (d_bal && d_see && d_ver);
    $display("TB_RESULT checks=%0d failures=%0d", c_bal + c_see + c_ver, f_bal + f_see + f_ver);
    $finish;
  end
endmodule
