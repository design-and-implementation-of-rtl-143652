// tb_dac_model: self-checking test of the DAC model: the output is
// code * 3.3 V / 4096 after a write and holds without one.
module tb_dac_model;
  logic clk = 1'b0, rst_n = 1'b0, wr = 1'b0;
  logic [11:0] data = '0;
  real vout, expv;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  dac_model dut (.clk, .rst_n, .wr, .data, .vout);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1 check(vout == 0.0, "zero after reset");
    rst_n = 1'b1;
    expv = 0.0;
    for (int k = 0; k < 2000; k++) begin
      wr = 1'($urandom);
      data = 12'($urandom);
      @(posedge clk); #1;
      if (wr) expv = real'(data) * 3.3 / 4096.0;
      check(vout > expv - 1e-9 && vout < expv + 1e-9, "output voltage");
    end
    data = 12'hFFF; wr = 1'b1;
    @(posedge clk); #1;
    check(vout > 3.299 && vout < 3.3, "full scale just below VREF");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
