// tb_current_comparator: self-checking testbench of the comparator model.
// Random rail currents are compared with an ideal comparator and with one
// given a 1 nA input offset; the expected bit is worked out in the bench.
module tb_current_comparator;
  int checks = 0, failures = 0;
  real ip, ineg;
  logic o, o_off;
  int ones = 0;

  current_comparator                  dut  (.i_pos(ip), .i_neg(ineg), .out(o));
  current_comparator #(.OFFSET(1e-9)) dut2 (.i_pos(ip), .i_neg(ineg), .out(o_off));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 500; n++) begin
      ip   = real'($urandom_range(0, 100)) * 1.0e-10;
      ineg = real'($urandom_range(0, 100)) * 1.0e-10;
      #1;
      checks += 2;
      if (o != (ip >= ineg)) begin
        failures++;
        $display("FAIL ideal pos=%e neg=%e out=%b", ip, ineg, o);
      end
      if (o_off != (ip + 1.0e-9 >= ineg)) begin
        failures++;
        $display("FAIL offset pos=%e neg=%e out=%b", ip, ineg, o_off);
      end
      ones += int'(o);
    end
    checks++;
    if (ones == 0 || ones == 500) begin failures++; $display("FAIL one-sided"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
