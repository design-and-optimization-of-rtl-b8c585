// tb_rbf_kernel_cell: self-checking testbench of the Gaussian kernel cell.
// Checks the peak (I_in/4 at V1 = V2), the symmetry in V1 - V2, the whole
// transfer curve against I_in/4 * (1 - tanh^2(dv / (2 n V_T))) and, for
// small dv, closeness to the Gaussian I_in/4 * exp(-dv^2 / (4 n^2 V_T^2)).
module tb_rbf_kernel_cell;
  int checks = 0, failures = 0;
  localparam real NVT = 1.5 * 0.02585;

  real v1, v2, iin, iout, iout_m;

  rbf_kernel_cell dut  (.v1(v1), .v2(v2), .iin(iin), .iout(iout));
  rbf_kernel_cell dutm (.v1(v2), .v2(v1), .iin(iin), .iout(iout_m));

  function automatic real relerr(real a, real b);
    real d = a - b;
    if (d < 0) d = -d;
    return d / ((b < 0 ? -b : b) + 1.0e-30);
  endfunction

  task automatic check(string what, real got, real expv, real tol);
    checks++;
    if (relerr(got, expv) > tol) begin
      failures++;
      $display("FAIL %s got=%e expected=%e (dv=%f)", what, got, expv, v1 - v2);
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
    real dv, t;
    iin = 20.0e-9; v1 = 0.5; v2 = 0.5; #1;
    check("peak", iout, iin / 4.0, 1e-9);
    for (int n = 0; n < 400; n++) begin
      dv = (real'($urandom_range(0, 8000)) - 4000.0) / 10000.0;  // +-0.4 V
      v2 = 0.3; v1 = 0.3 + dv; iin = real'($urandom_range(1, 100)) * 1.0e-9;
      #1;
      t = $tanh(dv / (2.0 * NVT));
      check("sech2", iout, iin / 4.0 * (1.0 - t * t), 1e-6);
      check("symmetry", iout_m, iout, 1e-9);
      if (dv > -0.004 && dv < 0.004)
        check("gauss", iout, iin / 4.0 * $exp(-dv * dv / (4.0 * NVT * NVT)), 2e-4);
    end
    // Monotonic fall away from the peak.
    v2 = 0.3; v1 = 0.35; #1; t = iout;
    v1 = 0.40; #1;
    checks++;
    if (!(iout < t)) begin failures++; $display("FAIL not falling"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
