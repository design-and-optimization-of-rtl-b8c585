// tb_alpha_multiplier: self-checking testbench of the alpha multiplier.
// Sets the control difference for a wanted alpha with the inverse mapping
// dV = n V_T ln(1/alpha - 1) and checks that the output is alpha * I_in;
// also checks alpha = 1/2 at dV = 0 and the limits for large |dV|.
module tb_alpha_multiplier;
  int checks = 0, failures = 0;
  localparam real NVT = 1.5 * 0.02585;

  real iin, va_p, va_n, iout;

  alpha_multiplier dut (.iin(iin), .va_p(va_p), .va_n(va_n), .iout(iout));

  task automatic check(string what, real got, real expv, real tol);
    real d = got - expv;
    if (d < 0) d = -d;
    checks++;
    if (d > tol) begin
      failures++;
      $display("FAIL %s got=%e expected=%e", what, got, expv);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real a;
    iin = 8.0e-9; va_p = 0.6; va_n = 0.6; #1;
    check("half", iout, 4.0e-9, 1e-15);
    va_p = 1.0; va_n = 0.0; #1;
    check("off", iout, 0.0, 1e-15);
    va_p = 0.0; va_n = 1.0; #1;
    check("full", iout, iin, 1e-15);
    for (int n = 0; n < 300; n++) begin
      a = real'($urandom_range(1, 999)) / 1000.0;
      iin = real'($urandom_range(1, 50)) * 1.0e-9;
      va_n = 0.5;
      va_p = 0.5 + NVT * $ln(1.0 / a - 1.0);
      #1;
      check("alpha", iout, a * iin, 1e-6 * iin);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
