// tb_ovo_encoder: self-checking testbench of the decision encoder.
// For three classes all eight patterns are checked against a table written
// out by hand (pairs (0,1),(0,2),(1,2); the two cyclic patterns, where each
// class wins once, resolve to class 0). For four and two classes every
// pattern is checked against a vote count done in the testbench.
module tb_ovo_encoder;
  int checks = 0, failures = 0;

  logic [2:0] b3;
  logic [1:0] l3;
  logic [5:0] b4;
  logic [1:0] l4;
  logic [0:0] b2;
  logic [0:0] l2;

  ovo_encoder #(.N_CLASSES(3)) dut3 (.bits(b3), .label(l3));
  ovo_encoder #(.N_CLASSES(4)) dut4 (.bits(b4), .label(l4));
  ovo_encoder #(.N_CLASSES(2)) dut2 (.bits(b2), .label(l2));

  // index = {b(1,2), b(0,2), b(0,1)}
  localparam int EXP3 [8] = '{0, 1, 0, 1, 0, 0, 2, 2};

  // Testbench's own vote count: walks the pairs of k classes and keeps the
  // first class reaching the highest count.
  function automatic int vote(int k, int pat);
    int v [8];
    int p = 0, best = 0;
    for (int c = 0; c < 8; c++) v[c] = 0;
    for (int i = 0; i < k; i++)
      for (int j = i + 1; j < k; j++) begin
        if ((pat >> p) & 1) v[j] += 1; else v[i] += 1;
        p++;
      end
    for (int c = 0; c < k; c++) if (v[c] > v[best]) best = c;
    return best;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    b4 = '0; b2 = '0;
    for (int p = 0; p < 8; p++) begin
      b3 = 3'(p);
      #1;
      checks++;
      if (int'(l3) != EXP3[p]) begin
        failures++;
        $display("FAIL K=3 bits=%b label=%0d expected=%0d", b3, l3, EXP3[p]);
      end
    end
    for (int p = 0; p < 64; p++) begin
      b4 = 6'(p);
      #1;
      checks++;
      if (int'(l4) != vote(4, p)) begin
        failures++;
        $display("FAIL K=4 bits=%b label=%0d expected=%0d", b4, l4, vote(4, p));
      end
    end
    for (int p = 0; p < 2; p++) begin
      b2 = 1'(p);
      #1;
      checks++;
      if (int'(l2) != p) begin
        failures++;
        $display("FAIL K=2 bit=%b label=%0d", b2, l2);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
