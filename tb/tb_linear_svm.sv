// tb_linear_svm: self-checking testbench of the digital linear classifier.
// Three instances with different hardwired coefficients (one with zero and
// power-of-two weights, one with extreme 8-bit weights, one with the
// eight-input width of the example datapath) are driven with corner and
// random feature codes. Each score is recomputed in integer arithmetic and
// the output bit is checked against its sign (score >= 0 gives 1).
module tb_linear_svm;
  int checks = 0, failures = 0;

  localparam int N5 = 5;
  localparam int N8 = 8;
  localparam logic signed [N5-1:0][7:0] WA = {-8'sd8, 8'sd0, 8'sd64, -8'sd3, 8'sd21};
  localparam logic signed [15:0]        BA = -16'sd380;
  localparam logic signed [N5-1:0][7:0] WB = {8'sd127, -8'sd128, -8'sd128, 8'sd127, -8'sd1};
  localparam logic signed [15:0]        BB = 16'sd32767;
  localparam logic signed [N8-1:0][7:0] WC = {8'sd5, -8'sd7, 8'sd16, -8'sd2, 8'sd0, 8'sd1, -8'sd33, 8'sd9};
  localparam logic signed [15:0]        BC = -16'sd60;

  logic [N5-1:0][3:0] xa, xb;
  logic [N8-1:0][3:0] xc;
  logic signed [17:0] sa, sb;
  logic signed [17:0] sc;
  logic oa, ob, oc;

  linear_svm #(.N_IN(N5), .WEIGHTS(WA), .BIAS(BA)) dut_a (.x(xa), .score(sa), .out(oa));
  linear_svm #(.N_IN(N5), .WEIGHTS(WB), .BIAS(BB)) dut_b (.x(xb), .score(sb), .out(ob));
  linear_svm #(.N_IN(N8), .WEIGHTS(WC), .BIAS(BC)) dut_c (.x(xc), .score(sc), .out(oc));

  int pos_seen = 0, neg_seen = 0;

  function automatic int ref_score5(logic [N5-1:0][3:0] x, logic signed [N5-1:0][7:0] w, int b);
    int s = b;
    for (int i = 0; i < N5; i++) s += int'(x[i]) * int'(signed'(w[i]));
    return s;
  endfunction

  function automatic int ref_score8(logic [N8-1:0][3:0] x, logic signed [N8-1:0][7:0] w, int b);
    int s = b;
    for (int i = 0; i < N8; i++) s += int'(x[i]) * int'(signed'(w[i]));
    return s;
  endfunction

  task automatic compare(string name, int got, logic got_out, int expv);
    checks += 2;
    if (got != expv) begin
      failures++;
      $display("FAIL %s score=%0d expected=%0d", name, got, expv);
    end
    if (got_out != (expv >= 0)) begin
      failures++;
      $display("FAIL %s out=%0b expected=%0b", name, got_out, expv >= 0);
    end
    if (expv >= 0) pos_seen++; else neg_seen++;
  endtask

  task automatic apply();
    #1;
    compare("A", int'(sa), oa, ref_score5(xa, WA, int'(BA)));
    compare("B", int'(sb), ob, ref_score5(xb, WB, int'(BB)));
    compare("C", int'(sc), oc, ref_score8(xc, WC, int'(BC)));
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    xa = '0; xb = '0; xc = '0; apply();
    xa = '1; xb = '1; xc = '1; apply();
    // Margin exactly zero: 20*21 - 40 = 380 cancels the bias of A.
    xa = '0; xa[0] = 4'd15; xa[1] = 4'd0; xa[4] = 4'd0; xa[2] = 4'd1; apply();
    for (int n = 0; n < 2000; n++) begin
      for (int i = 0; i < N5; i++) begin
        xa[i] = 4'($urandom);
        xb[i] = 4'($urandom);
      end
      for (int i = 0; i < N8; i++) xc[i] = 4'($urandom);
      apply();
    end
    checks++;
    if (pos_seen == 0 || neg_seen == 0) begin
      failures++;
      $display("FAIL both signs not exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
