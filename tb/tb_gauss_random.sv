// tb_gauss_random: self-checking test of the 12-fold M-sequence sum.
//
// Every word of the sum is compared with 12 reference LFSRs computed here from
// the same seeds (rebuilt from the generator's formula). Over 60 000 samples
// the centred sum must have mean near 0 and standard deviation near 2^16, and
// the fraction in1sd one standard deviation must be near the Gaussian 68.3 %.
module tb_gauss_random;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [19:0] sum;
  logic signed [20:0] ctr;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  gauss_random dut (.clk, .rst_n, .sum, .centered(ctr));

  function automatic logic [15:0] seed_of(input int unsigned i);
    logic [15:0] s;
    s = 16'h1D87 ^ 16'(i * 32'h9E37) ^ 16'(i * i * 32'h0F1B);
    if (s == '0) s = 16'(i + 1);
    return s;
  endfunction

  function automatic logic [15:0] step16(input logic [15:0] s);
    for (int i = 0; i < 16; i++) s = s[0] ? ((s >> 1) ^ 16'hB400) : (s >> 1);
    return s;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  logic [15:0] st [12];
  real acc, acc2, mean, sd;
  int in1sd, n, bad;

  initial begin
    for (int i = 0; i < 12; i++) st[i] = seed_of(i);
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    check(sum == 0, "sum cleared by reset");
    acc = 0; acc2 = 0; in1sd = 0; n = 60000; bad = 0;
    for (int k = 0; k < n; k++) begin
      logic [19:0] exp_sum;
      @(posedge clk); #1;
      exp_sum = 0;
      for (int i = 0; i < 12; i++) exp_sum += 20'(st[i]);
      for (int i = 0; i < 12; i++) st[i] = step16(st[i]);
      if (sum != exp_sum) bad++;
      if (k < 50) check(sum == exp_sum, $sformatf("sum word %0d", k));
      check(ctr == $signed({1'b0, sum}) - 21'sd393216, "centred = sum - 12*2^15");
      acc  += real'(ctr);
      acc2 += real'(ctr) * real'(ctr);
      if (ctr > -65536 && ctr < 65536) in1sd++;
    end
    check(bad == 0, "all sums match reference");
    mean = acc / n;
    sd   = $sqrt(acc2 / n - mean * mean);
    $display("mean=%f sd=%f within1sd=%f", mean, sd, real'(in1sd) / n);
    check(mean > -2000.0 && mean < 2000.0, "mean near 0");
    check(sd > 63000.0 && sd < 68000.0, "standard deviation near 2^16");
    check(real'(in1sd) / n > 0.66 && real'(in1sd) / n < 0.70, "68 % in1sd one sd");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
