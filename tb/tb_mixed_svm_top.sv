// tb_mixed_svm_top: end-to-end testbench of the mixed-kernel, mixed-signal
// SVM at its default parameters (three classes, five inputs, pair 0 vs 2 on
// the analog RBF kernel with four support vectors, pairs 0 vs 1 and 1 vs 2 on
// the digital linear kernel).
//
// For every trial a new analog configuration is drawn (support-vector
// voltages, alpha values, labels); then sensor voltages are applied, some
// near a support vector, some anywhere in [0,1], some outside the ADC range.
// The bench computes on its own the ADC codes (step search), the two linear
// margins (integer dot products with the default coefficients repeated
// below), the RBF rail currents (tanh form of the kernel) and the label by
// counting pairwise wins, and compares features, pair bits and label.
//
// Mechanisms that must each occur at least once: every class as the
// answer, both outcomes of every pair, a cyclic (three-way tie) pattern
// resolved by the encoder, ADC clamping at both ends, and an RBF decision
// with the input near a support vector.
module tb_mixed_svm_top;
  int checks = 0, failures = 0;

  localparam int K = 3;
  localparam int P = 3;
  localparam int N = 5;
  localparam int M = 4;
  localparam real NVT = 1.5 * 0.02585;
  localparam real IT = 10.0e-9;
  // Default coefficients of the top (pair, input).
  localparam int W [P][N] = '{'{21, -3, 64, 0, -8}, '{0, 0, 0, 0, 0}, '{32, 4, 12, -16, 0}};
  localparam int B [P] = '{-380, 0, -500};
  localparam bit IS_RBF [P] = '{1'b0, 1'b1, 1'b0};

  real v_in [N];
  real rbf_vs [P][M][N];
  real rbf_va_p [P][M];
  real rbf_va_n [P][M];
  logic [P-1:0][M-1:0] rbf_y;
  logic [N-1:0][3:0] features;
  logic [P-1:0] pair_bits;
  logic [1:0] label;

  real alpha [M];

  mixed_svm_top dut (
    .v_in(v_in), .rbf_vs(rbf_vs), .rbf_va_p(rbf_va_p), .rbf_va_n(rbf_va_n),
    .rbf_y(rbf_y), .features(features), .pair_bits(pair_bits), .label(label));

  int n_label [K];
  int n_bit [P][2];
  // Event counters: cyclic tie, ADC clamp low, ADC clamp high, RBF decision
  // with the input near a support vector.
  typedef enum int {EV_TIE, EV_CLAMP_LO, EV_CLAMP_HI, EV_NEAR_SV, EV_COUNT} event_e;
  int n_event [EV_COUNT];

  function automatic int adc_ref(real v);
    int k = 0;
    for (int s = 1; s < 16; s++) if (v >= real'(s) / 16.0) k = s;
    return k;
  endfunction

  function automatic int vote3(logic [2:0] b);
    int v [3] = '{0, 0, 0};
    int best = 0;
    if (b[0]) v[1]++; else v[0]++;  // 0 vs 1
    if (b[1]) v[2]++; else v[0]++;  // 0 vs 2
    if (b[2]) v[2]++; else v[1]++;  // 1 vs 2
    for (int c = 1; c < 3; c++) if (v[c] > v[best]) best = c;
    return best;
  endfunction

  task automatic apply_and_check(bit near);
    int code [N];
    logic [P-1:0] eb;
    real ep, en, k, t;
    int s;
    #1;
    for (int i = 0; i < N; i++) begin
      code[i] = adc_ref(v_in[i]);
      if (v_in[i] < 0.0) n_event[EV_CLAMP_LO] += 1;
      if (v_in[i] > 1.0) n_event[EV_CLAMP_HI] += 1;
      checks++;
      if (int'(features[i]) != code[i]) begin
        failures++;
        $display("FAIL feature %0d: %0d expected %0d", i, features[i], code[i]);
      end
    end
    for (int p = 0; p < P; p++) begin
      if (IS_RBF[p]) begin
        ep = 0.0; en = 0.0;
        for (int j = 0; j < M; j++) begin
          k = IT;
          for (int d = 0; d < N; d++) begin
            t = $tanh((v_in[d] - rbf_vs[p][j][d]) / (2.0 * NVT));
            k = k * (1.0 - t * t) / 4.0;
          end
          if (rbf_y[p][j]) ep += alpha[j] * k; else en += alpha[j] * k;
        end
        eb[p] = (ep >= en);
        if (near) n_event[EV_NEAR_SV] += 1;
      end else begin
        s = B[p];
        for (int i = 0; i < N; i++) s += W[p][i] * code[i];
        eb[p] = (s >= 0);
      end
      n_bit[p][eb[p]]++;
    end
    checks++;
    if (pair_bits !== eb) begin
      failures++;
      $display("FAIL pair bits %b expected %b", pair_bits, eb);
    end
    checks++;
    if (int'(label) != vote3(eb)) begin
      failures++;
      $display("FAIL label %0d expected %0d (bits %b)", label, vote3(eb), eb);
    end
    n_label[vote3(eb)]++;
    if (eb == 3'b010 || eb == 3'b101) n_event[EV_TIE] += 1;
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int sv;
    for (int c = 0; c < K; c++) n_label[c] = 0;
    for (int p = 0; p < P; p++) begin n_bit[p][0] = 0; n_bit[p][1] = 0; end
    for (int e = 0; e < EV_COUNT; e++) n_event[e] = 0;
    // Analog ports of linear pairs are unused; give them fixed values.
    for (int p = 0; p < P; p++)
      for (int j = 0; j < M; j++) begin
        rbf_va_p[p][j] = 0.5; rbf_va_n[p][j] = 0.5;
        for (int d = 0; d < N; d++) rbf_vs[p][j][d] = 0.5;
      end
    rbf_y = '0;
    for (int trial = 0; trial < 40; trial++) begin
      for (int j = 0; j < M; j++) begin
        for (int d = 0; d < N; d++) rbf_vs[1][j][d] = real'($urandom_range(100, 900)) / 1000.0;
        alpha[j] = real'($urandom_range(5, 95)) / 100.0;
        rbf_va_n[1][j] = 0.5;
        rbf_va_p[1][j] = 0.5 + NVT * $ln(1.0 / alpha[j] - 1.0);
      end
      rbf_y[1] = M'($urandom);
      rbf_y[1][0] = 1'b1; rbf_y[1][1] = 1'b0;
      for (int n = 0; n < 50; n++) begin
        if (n % 2 == 0) begin
          sv = $urandom_range(0, M - 1);
          for (int d = 0; d < N; d++)
            v_in[d] = rbf_vs[1][sv][d] + (real'($urandom_range(0, 100)) - 50.0) / 1000.0;
          apply_and_check(1'b1);
        end else begin
          for (int d = 0; d < N; d++)
            v_in[d] = real'($urandom_range(0, 1200)) / 1000.0 - 0.1;
          apply_and_check(1'b0);
        end
      end
    end
    $display("labels 0/1/2: %0d %0d %0d", n_label[0], n_label[1], n_label[2]);
    $display("pair bits 0/1: (0v1) %0d %0d  (0v2) %0d %0d  (1v2) %0d %0d",
             n_bit[0][0], n_bit[0][1], n_bit[1][0], n_bit[1][1], n_bit[2][0], n_bit[2][1]);
    $display("cyclic ties %0d, ADC clamps low %0d high %0d, RBF near a support vector %0d",
             n_event[EV_TIE], n_event[EV_CLAMP_LO], n_event[EV_CLAMP_HI], n_event[EV_NEAR_SV]);
    for (int c = 0; c < K; c++) begin
      checks++;
      if (n_label[c] == 0) begin failures++; $display("FAIL class %0d never output", c); end
    end
    for (int p = 0; p < P; p++)
      for (int v = 0; v < 2; v++) begin
        checks++;
        if (n_bit[p][v] == 0) begin failures++; $display("FAIL pair %0d never gave %0d", p, v); end
      end
    checks += 4;
    if (n_event[EV_TIE] == 0)      begin failures++; $display("FAIL no cyclic tie"); end
    if (n_event[EV_CLAMP_LO] == 0) begin failures++; $display("FAIL no low clamp"); end
    if (n_event[EV_CLAMP_HI] == 0) begin failures++; $display("FAIL no high clamp"); end
    if (n_event[EV_NEAR_SV] == 0)  begin failures++; $display("FAIL no RBF decision near a support vector"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
