// tb_rbf_classifier: self-checking testbench of the analog RBF classifier.
// M = 4 support vectors over D = 2 features, with random support-vector
// voltages, alpha values and labels. For random inputs near the support
// vectors the bench computes each branch current alpha_j * K_j(x) itself
// (tanh form of the kernel), sums them per label onto the two rails and
// checks both rail currents and the comparator bit; both decisions must occur.
module tb_rbf_classifier;
  int checks = 0, failures = 0;
  localparam int  M = 4;
  localparam int  D = 2;
  localparam real NVT = 1.5 * 0.02585;
  localparam real IT = 10.0e-9;

  real vx [D];
  real vs [M][D];
  real va_p [M];
  real va_n [M];
  logic [M-1:0] y;
  real ip, ineg;
  logic out;
  real alpha [M];
  int ones = 0;

  rbf_classifier #(.M(M), .D(D), .I_TAIL(IT)) dut (
    .vx(vx), .vs(vs), .va_p(va_p), .va_n(va_n), .y(y),
    .i_pos(ip), .i_neg(ineg), .out(out));

  task automatic check(string what, real got, real expv);
    real d = got - expv;
    if (d < 0) d = -d;
    checks++;
    if (d > 1e-6 * (expv < 0 ? -expv : expv) + 1e-30) begin
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
    real ep, en, k, t;
    for (int trial = 0; trial < 20; trial++) begin
      for (int j = 0; j < M; j++) begin
        for (int d = 0; d < D; d++) vs[j][d] = real'($urandom_range(200, 800)) / 1000.0;
        alpha[j] = real'($urandom_range(5, 95)) / 100.0;
        va_n[j] = 0.5;
        va_p[j] = 0.5 + NVT * $ln(1.0 / alpha[j] - 1.0);
      end
      y = M'($urandom);
      y[0] = 1'b1; y[1] = 1'b0;
      for (int n = 0; n < 50; n++) begin
        for (int d = 0; d < D; d++)
          vx[d] = vs[n % M][d] + (real'($urandom_range(0, 160)) - 80.0) / 1000.0;
        #1;
        ep = 0.0; en = 0.0;
        for (int j = 0; j < M; j++) begin
          k = IT;
          for (int d = 0; d < D; d++) begin
            t = $tanh((vx[d] - vs[j][d]) / (2.0 * NVT));
            k = k * (1.0 - t * t) / 4.0;
          end
          if (y[j]) ep += alpha[j] * k; else en += alpha[j] * k;
        end
        check("i_pos", ip, ep);
        check("i_neg", ineg, en);
        checks++;
        if (out != (ep >= en)) begin
          failures++;
          $display("FAIL out=%b pos=%e neg=%e", out, ep, en);
        end
        ones += int'(out);
      end
    end
    checks++;
    if (ones == 0 || ones == 1000) begin failures++; $display("FAIL one-sided decisions"); end
    $display("decisions for the positive rail: %0d of 1000", ones);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
