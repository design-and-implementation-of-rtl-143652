// tb_mseq: self-checking test of the M-sequence generator.
//
// One instance advances one shift per clock: over 2^16 - 1 clocks it must visit
// every nonzero state exactly once (maximal length, uniform) and come back to
// its seed. A second instance at the default 16 shifts per clock is compared,
// word by word, with a reference LFSR computed here. The enable is checked to
// hold the state.
module tb_mseq;
  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  logic [15:0] r1, r16;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  mseq #(.STEPS(1), .SEED(16'h0001)) dut1 (.clk, .rst_n, .en, .rnd(r1));
  mseq dut16 (.clk, .rst_n, .en, .rnd(r16));

  function automatic logic [15:0] ref_step(input logic [15:0] s, input int n);
    for (int i = 0; i < n; i++) s = s[0] ? ((s >> 1) ^ 16'hB400) : (s >> 1);
    return s;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  bit seen [65536];
  logic [15:0] ref16, hold;
  int dup = 0, zero = 0;

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    check(r1 == 16'h0001 && r16 == 16'hACE1, "reset loads seeds");
    en = 1'b0;
    hold = r16;
    repeat (3) @(posedge clk);
    #1 check(r16 == hold, "enable low holds state");
    en = 1'b1;
    ref16 = r16;
    for (int i = 0; i < 65535; i++) begin
      if (seen[r1]) dup++;
      seen[r1] = 1'b1;
      if (r1 == 0) zero++;
      if (i < 4000) begin
        check(r16 == ref16, $sformatf("16-step word %0d", i));
        ref16 = ref_step(ref16, 16);
      end
      @(posedge clk); #1;
    end
    check(dup == 0, "no state repeats within one period");
    check(zero == 0, "zero state never reached");
    check(r1 == 16'h0001, "period is 65535");
    begin
      int missing = 0;
      for (int v = 1; v < 65536; v++) if (!seen[v]) missing++;
      check(missing == 0, "all nonzero words occur once (uniform)");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
