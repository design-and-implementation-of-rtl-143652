// tb_output_adder: self-checking test of the summing-amplifier model: the sum
// of two inputs, limited to 0 .. 3.2 V.
module tb_output_adder;
  real a, b, vout, e;
  int checks = 0, failures = 0, nclip = 0;

  output_adder dut (.a, .b, .vout);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    for (int k = 0; k < 2000; k++) begin
      a = real'($urandom_range(0, 2500)) / 1000.0 - 0.3;
      b = real'($urandom_range(0, 2500)) / 1000.0 - 0.3;
      #1;
      e = a + b;
      if (e > 3.2) begin e = 3.2; nclip++; end
      if (e < 0.0) begin e = 0.0; nclip++; end
      check(vout > e - 1e-9 && vout < e + 1e-9, "sum with limits");
    end
    check(nclip > 0, "limits exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
