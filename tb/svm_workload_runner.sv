// svm_workload_runner: drives one configuration of mixed_svm_top and checks
// it against a reference model written in the bench. Used by
// tb_svm_workloads, which runs the three task configurations side by side.
//
// For TRIALS analog configurations (random support-vector voltages, alpha
// values, labels for every RBF pair) it applies STEPS input vectors, half of
// them near a support vector of some RBF pair, and compares ADC codes, pair
// bits and label with the reference: floor quantiser, integer dot products,
// tanh form of the RBF kernel, pairwise vote count with ties to the lowest
// class. It also counts a failure if some class or some pair outcome never
// occurs. When done it raises done and holds its counts on the outputs.
module svm_workload_runner #(
  parameter int unsigned N_IN = 5,
  parameter int unsigned M = 4,
  parameter logic [2:0] KERNEL_MAP = 3'b010,
  parameter logic signed [2:0][N_IN-1:0][7:0] LIN_WEIGHTS = '0,
  parameter logic signed [2:0][15:0] LIN_BIAS = '0,
  parameter int unsigned TRIALS = 20,
  parameter int unsigned STEPS = 50
) (
  output int   checks,
  output int   failures,
  output logic done
);
  localparam int K = 3;
  localparam int P = 3;
  localparam real NVT = 1.5 * 0.02585;
  localparam real IT = 10.0e-9;

  real v_in [N_IN];
  real rbf_vs [P][M][N_IN];
  real rbf_va_p [P][M];
  real rbf_va_n [P][M];
  logic [P-1:0][M-1:0] rbf_y;
  logic [N_IN-1:0][3:0] features;
  logic [P-1:0] pair_bits;
  logic [1:0] label;

  // Counters live in module variables initialised at their declaration and
  // are only ever incremented.
  int n_checks = 0;
  int n_failures = 0;
  assign checks = n_checks;
  assign failures = n_failures;

  real alpha [P][M];
  int n_label [K];
  int n_bit [P][2];

  mixed_svm_top #(
    .N_CLASSES(K), .N_IN(N_IN), .M(M), .KERNEL_MAP(KERNEL_MAP),
    .LIN_WEIGHTS(LIN_WEIGHTS), .LIN_BIAS(LIN_BIAS)
  ) dut (
    .v_in(v_in), .rbf_vs(rbf_vs), .rbf_va_p(rbf_va_p), .rbf_va_n(rbf_va_n),
    .rbf_y(rbf_y), .features(features), .pair_bits(pair_bits), .label(label));

  function automatic int adc_ref(real v);
    int k = 0;
    for (int s = 1; s < 16; s++) if (v >= real'(s) / 16.0) k = s;
    return k;
  endfunction

  function automatic int vote3(logic [2:0] b);
    int v [3] = '{0, 0, 0};
    int best = 0;
    if (b[0]) v[1]++; else v[0]++;
    if (b[1]) v[2]++; else v[0]++;
    if (b[2]) v[2]++; else v[1]++;
    for (int c = 1; c < 3; c++) if (v[c] > v[best]) best = c;
    return best;
  endfunction

  task automatic step();
    int code [N_IN];
    logic [P-1:0] eb;
    real ep, en, k, t;
    int s;
    #1;
    for (int i = 0; i < int'(N_IN); i++) begin
      code[i] = adc_ref(v_in[i]);
      n_checks++;
      if (int'(features[i]) != code[i]) n_failures++;
    end
    for (int p = 0; p < P; p++) begin
      if (KERNEL_MAP[p]) begin
        ep = 0.0; en = 0.0;
        for (int j = 0; j < int'(M); j++) begin
          k = IT;
          for (int d = 0; d < int'(N_IN); d++) begin
            t = $tanh((v_in[d] - rbf_vs[p][j][d]) / (2.0 * NVT));
            k = k * (1.0 - t * t) / 4.0;
          end
          if (rbf_y[p][j]) ep += alpha[p][j] * k; else en += alpha[p][j] * k;
        end
        eb[p] = (ep >= en);
      end else begin
        s = int'(signed'(LIN_BIAS[p]));
        for (int i = 0; i < int'(N_IN); i++)
          s += int'(signed'(LIN_WEIGHTS[p][i])) * code[i];
        eb[p] = (s >= 0);
      end
      n_bit[p][eb[p]]++;
    end
    n_checks += 2;
    if (pair_bits !== eb) begin
      n_failures++;
      $display("FAIL map=%b bits %b expected %b", KERNEL_MAP, pair_bits, eb);
    end
    if (int'(label) != vote3(eb)) begin
      n_failures++;
      $display("FAIL map=%b label %0d expected %0d", KERNEL_MAP, label, vote3(eb));
    end
    n_label[vote3(eb)]++;
  endtask

  initial begin
    int p, sv;
    done = 1'b0;
    for (int c = 0; c < K; c++) n_label[c] = 0;
    for (int q = 0; q < P; q++) begin n_bit[q][0] = 0; n_bit[q][1] = 0; end
    for (int q = 0; q < P; q++)
      for (int j = 0; j < int'(M); j++) begin
        rbf_va_p[q][j] = 0.5; rbf_va_n[q][j] = 0.5; alpha[q][j] = 0.5;
        for (int d = 0; d < int'(N_IN); d++) rbf_vs[q][j][d] = 0.5;
      end
    rbf_y = '0;
    for (int trial = 0; trial < int'(TRIALS); trial++) begin
      for (int q = 0; q < P; q++) begin
        for (int j = 0; j < int'(M); j++) begin
          for (int d = 0; d < int'(N_IN); d++)
            rbf_vs[q][j][d] = real'($urandom_range(100, 900)) / 1000.0;
          alpha[q][j] = real'($urandom_range(5, 95)) / 100.0;
          rbf_va_n[q][j] = 0.5;
          rbf_va_p[q][j] = 0.5 + NVT * $ln(1.0 / alpha[q][j] - 1.0);
        end
        rbf_y[q] = M'($urandom);
        rbf_y[q][0] = 1'b1;
        rbf_y[q][1] = 1'b0;
      end
      for (int n = 0; n < int'(STEPS); n++) begin
        if (n % 2 == 0) begin
          // Near a support vector of a randomly picked RBF pair.
          p = $urandom_range(0, P - 1);
          while (!KERNEL_MAP[p]) p = (p + 1) % P;
          sv = $urandom_range(0, M - 1);
          for (int d = 0; d < int'(N_IN); d++)
            v_in[d] = rbf_vs[p][sv][d] + (real'($urandom_range(0, 100)) - 50.0) / 1000.0;
        end else begin
          for (int d = 0; d < int'(N_IN); d++)
            v_in[d] = real'($urandom_range(0, 1000)) / 1000.0;
        end
        step();
      end
    end
    $display("map %b, %0d inputs: labels 0/1/2 %0d %0d %0d; pair bits 0/1 %0d/%0d %0d/%0d %0d/%0d",
             KERNEL_MAP, N_IN, n_label[0], n_label[1], n_label[2],
             n_bit[0][0], n_bit[0][1], n_bit[1][0], n_bit[1][1], n_bit[2][0], n_bit[2][1]);
    for (int c = 0; c < K; c++) begin
      n_checks++;
      if (n_label[c] == 0) begin n_failures++; $display("FAIL map=%b class %0d never output", KERNEL_MAP, c); end
    end
    for (int q = 0; q < P; q++)
      for (int v = 0; v < 2; v++) begin
        n_checks++;
        if (n_bit[q][v] == 0) begin n_failures++; $display("FAIL map=%b pair %0d never gave %0d", KERNEL_MAP, q, v); end
      end
    done = 1'b1;
  end
endmodule
