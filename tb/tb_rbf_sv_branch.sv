// tb_rbf_sv_branch: self-checking testbench of one support-vector branch.
// With D = 3 dimensions (the product depth used when the analog kernel was
// characterised) and random feature, support-vector and alpha voltages, the
// kernel current is checked against I_TAIL * prod_d (1 - tanh^2(dv_d/(2nV_T)))/4
// and the branch current against alpha times that; the bias voltage of the
// R1/R2 divider is checked against 1 V * 4.28 / 14.28.
module tb_rbf_sv_branch;
  int checks = 0, failures = 0;
  localparam int  D = 3;
  localparam real NVT = 1.5 * 0.02585;
  localparam real IT = 10.0e-9;

  real vx [D];
  real vs [D];
  real va_p, va_n, ik, ij, vb;

  rbf_sv_branch #(.D(D), .I_TAIL(IT)) dut (
    .vx(vx), .vs(vs), .va_p(va_p), .va_n(va_n), .ik(ik), .ij(ij), .vb(vb));

  task automatic check(string what, real got, real expv, real rel);
    real d = got - expv;
    if (d < 0) d = -d;
    checks++;
    if (d > rel * (expv < 0 ? -expv : expv) + 1e-30) begin
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
    real k, t, a;
    for (int d = 0; d < D; d++) begin vx[d] = 0.4; vs[d] = 0.4; end
    va_p = 0.5; va_n = 0.5;
    #1;
    check("vb", vb, 4.28 / 14.28, 1e-9);
    check("peak", ik, IT / 64.0, 1e-9);
    check("alpha_half", ij, IT / 128.0, 1e-9);
    for (int n = 0; n < 300; n++) begin
      k = IT;
      for (int d = 0; d < D; d++) begin
        vx[d] = real'($urandom_range(0, 1000)) / 1000.0;
        vs[d] = vx[d] + (real'($urandom_range(0, 200)) - 100.0) / 1000.0;
        t = $tanh((vx[d] - vs[d]) / (2.0 * NVT));
        k = k * (1.0 - t * t) / 4.0;
      end
      a = real'($urandom_range(1, 99)) / 100.0;
      va_n = 0.5;
      va_p = 0.5 + NVT * $ln(1.0 / a - 1.0);
      #1;
      check("kernel", ik, k, 1e-6);
      check("branch", ij, a * k, 1e-6);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
