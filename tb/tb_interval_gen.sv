// tb_interval_gen: self-checking test of the time-interval test.
//
// Checks that a test strobe comes every TEST_DIV = 5 clocks, that z follows
// (rnd < Y) of the test one clock later and is never high otherwise, and, with
// the block's own M sequence as source and Y = 2000, that the event
// probability per test is 2000/2^16 = 0.0305 and the gaps between events are
// geometric: mean 1/p tests and P(gap > 1/p) near exp(-1).
module tb_interval_gen;
  import siggen_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [15:0] rnd, y_thr, lfsr;
  logic tick, z;
  logic use_lfsr = 1'b0;
  logic [15:0] rnd_ext = '0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  mseq u_src (.clk, .rst_n, .en(tick), .rnd(lfsr));  // one fresh word per test
  assign rnd = use_lfsr ? lfsr : rnd_ext;

  interval_gen dut (.clk, .rst_n, .rnd, .y_thr, .tick, .z);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  int last_tick, cyc = 0, ntests = 0, nev = 0, last_ev = -1, gaps = 0, gapsum = 0, longg = 0;
  bit exp_z;

  always @(posedge clk) cyc++;

  initial begin
    y_thr = Y_DEFAULT;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    // directed: strobe period and comparison
    last_tick = -1;
    exp_z = 0;
    for (int k = 0; k < 5000; k++) begin
      rnd_ext = ($urandom_range(0, 1) == 1) ? 16'($urandom_range(0, 4000)) : 16'($urandom);
      #1;
      if (tick) begin
        if (last_tick >= 0) check(cyc - last_tick == 5, "one test every 5 clocks");
        last_tick = cyc;
      end
      @(posedge clk);
      // z after this edge reflects the test of the previous cycle
      exp_z = tick && (rnd_ext < y_thr);
      #1 check(z == exp_z, "z = test && rnd < Y");
    end
    // statistics with the M sequence
    use_lfsr = 1'b1;
    for (int k = 0; k < 2_000_000; k++) begin
      @(posedge clk); #1;
      if (tick) ntests++;
      if (z) begin
        nev++;
        if (last_ev >= 0) begin
          gaps++;
          gapsum += (cyc - last_ev) / 5;
          if ((cyc - last_ev) / 5 > 33) longg++;
        end
        last_ev = cyc;
      end
    end
    $display("tests=%0d events=%0d p=%f mean gap=%f tests, P(gap>33)=%f", ntests, nev,
             real'(nev) / ntests, real'(gapsum) / gaps, real'(longg) / gaps);
    check(real'(nev) / ntests > 0.029 && real'(nev) / ntests < 0.032, "p = Y/2^16");
    check(real'(gapsum) / gaps > 31.0 && real'(gapsum) / gaps < 34.5, "mean gap 1/p");
    check(real'(longg) / gaps > 0.33 && real'(longg) / gaps < 0.40, "geometric tail");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
