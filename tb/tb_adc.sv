// tb_adc: self-checking testbench of the ADC model.
// Drives corner voltages and random voltages in and around the input range
// and checks each code against the quantisation step found by searching the
// step boundaries k/16 of the 4-bit converter (codes clamp at 0 and 15).
module tb_adc;
  int checks = 0, failures = 0;
  real vin;
  logic [3:0] code;

  adc dut (.vin(vin), .code(code));

  function automatic int expected_code(real v);
    int k;
    k = 0;
    for (int s = 1; s < 16; s++)
      if (v >= real'(s) / 16.0) k = s;
    return k;
  endfunction

  task automatic check(real v);
    vin = v;
    #1;
    checks++;
    if (int'(code) != expected_code(v)) begin
      failures++;
      $display("FAIL vin=%f code=%0d expected=%0d", v, code, expected_code(v));
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
    check(0.0); check(-0.3); check(1.0); check(1.5); check(0.9999);
    check(0.0624); check(0.0626); check(0.5); check(0.4999);
    for (int s = 0; s < 16; s++) check(real'(s) / 16.0 + 0.001);
    for (int n = 0; n < 500; n++)
      check(real'($urandom_range(0, 14000)) / 10000.0 - 0.2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
