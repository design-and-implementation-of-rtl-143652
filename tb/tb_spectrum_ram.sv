// tb_spectrum_ram: self-checking test of the spectrum memory.
//
// Fills all 1024 channels with a pattern, reads them back with the one-clock
// read latency, checks that an unwritten memory reads zero and that a write
// and a read of different channels in the same clock do not disturb each other.
module tb_spectrum_ram;
  logic clk = 1'b0, we = 1'b0;
  logic [9:0] waddr = '0, raddr = '0;
  logic [15:0] wdata = '0, rdata;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  spectrum_ram dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  function automatic logic [15:0] pat(input int i);
    return 16'((i * 40503 + 17) ^ (i << 7));
  endfunction

  initial begin
    raddr = 10'd77;
    @(posedge clk); #1 check(rdata == 0, "memory starts cleared");
    we = 1'b1;
    for (int i = 0; i < 1024; i++) begin
      waddr = 10'(i); wdata = pat(i);
      @(posedge clk); #1;
    end
    we = 1'b0;
    for (int i = 0; i < 1024; i++) begin
      raddr = 10'(i);
      @(posedge clk); #1;
      check(rdata == pat(i), $sformatf("channel %0d", i));
    end
    // write channel 5 while reading channel 6
    we = 1'b1; waddr = 10'd5; wdata = 16'hBEEF; raddr = 10'd6;
    @(posedge clk); #1;
    we = 1'b0;
    check(rdata == pat(6), "read beside a write");
    raddr = 10'd5;
    @(posedge clk); #1 check(rdata == 16'hBEEF, "written value");
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
