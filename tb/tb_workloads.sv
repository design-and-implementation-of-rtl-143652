// tb_workloads: the generator's measured distributions, taken from the analog
// output the way a multichannel analyser would see them.
//
// The complete generator runs at its default parameters. A pulse-height
// analyser written here finds the maximum of vout during each pulse, divides
// out the shaping channel's peak gain (computed in closed form) and the DAC
// scale, and histograms the recovered DAC codes; pulse start times give the
// interval histogram. Four runs:
//   flat      - uniform mode, 3200 pulses: 16 code hist each within 30 % of
//               the mean count;
//   Gaussian  - Gaussian mode, mean 1500, deviation 120 codes, 2000 pulses:
//               sample mean and deviation within 3 % / 8 %;
//   intervals - the gaps between pulses beyond the 10 us dead time are
//               exponential with rate p = 2000/2^16 per 0.1 us;
//   cyclical  - Y = 65535 and zero width: every pulse has the same height and
//               the same spacing (the stability test of a periodic signal).
module tb_workloads;
  import siggen_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  cfg_t cfg;
  real vout, v_dac, v_nai, v_csi;
  logic [DAC_W-1:0] dac_data;
  logic dac_wr, pulse_start, missed, stalled, busy, spec_accept;
  logic [1:0] sw1, sw2;
  int checks = 0, failures = 0;

  always #10 clk = ~clk;   // 50 MHz

  signal_generator dut (
    .clk, .rst_n, .cfg, .ram_we(1'b0), .ram_waddr('0), .ram_wdata('0), .vout, .dac_data,
    .dac_wr, .sw1, .sw2, .v_dac, .v_nai, .v_csi, .pulse_start, .missed, .stalled, .busy,
    .spec_accept);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  function automatic real peak_gain(input real rc);
    real g = 0.0, v;
    for (int k = 1; k <= 250; k++) begin
      v = rc / (rc - 300.0) * ($exp(-20.0 * k / rc) - $exp(-20.0 * k / 300.0));
      if (v > g) g = v;
    end
    return g;
  endfunction

  // pulse-height analyser
  real gain [2];
  real pk;
  int in_pulse = 0, x = 0, cyc = 0, last_start = -1;
  bit collect = 0;
  int codes [$];
  int gaps [$];

  always @(posedge clk) begin
    #1;
    cyc++;
    if (pulse_start) begin
      in_pulse = 1; pk = 0.0; x = sw1[1];
      if (collect && last_start >= 0) gaps.push_back(cyc - last_start);
      last_start = cyc;
    end
    if (in_pulse) begin
      if (vout > pk) pk = vout;
      if (sw2 == 0) begin
        in_pulse = 0;
        if (collect) codes.push_back(int'(pk / gain[x] / 3.3 * 4096.0));
      end
    end
  end

  task automatic run(input int n);
    repeat (700) @(posedge clk);
    codes.delete(); gaps.delete(); last_start = -1;
    collect = 1;
    while (codes.size() < n) @(posedge clk);
    collect = 0;
  endtask

  int hist [16];
  real s, s2, m, sd;
  int minc, maxc, ming, maxg;

  initial begin
    gain[0] = peak_gain(230.0);
    gain[1] = peak_gain(630.0);
    cfg = '0;
    cfg.y_thr   = Y_DEFAULT;
    cfg.nai_thr = 17'd32768;
    cfg.mode    = MODE_UNIFORM;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;

    // flat distribution
    run(3200);
    foreach (codes[i]) hist[codes[i] / 256]++;
    for (int b = 0; b < 16; b++)
      check(hist[b] > 140 && hist[b] < 260, $sformatf("flat: bin %0d holds %0d of 200", b, hist[b]));
    $display("flat: hist %p", hist);

    // intervals (taken from the same run): gap = dead time + geometric wait
    begin
      real mean_gap, lambda;
      s = 0; ming = 1 << 30;
      foreach (gaps[i]) begin s += gaps[i]; if (gaps[i] < ming) ming = gaps[i]; end
      mean_gap = s / gaps.size();
      // clocks beyond the shortest gap, in units of 0.1 us (5 clocks)
      lambda = 5.0 / (mean_gap - ming);
      $display("intervals: %0d gaps, shortest %0d clocks, exponential rate %f per 0.1 us (p = %f)",
               gaps.size(), ming, lambda, 2000.0 / 65536.0);
      check(ming >= 501 && ming < 520, "shortest gap is the dead time plus one test");
      check(lambda > 0.0275 && lambda < 0.0335, "exponential rate = Y/2^16 per 0.1 us");
    end

    // Gaussian
    cfg.mode = MODE_GAUSS; cfg.g_mean = 12'd1500; cfg.g_sigma = 12'd120;
    run(2000);
    s = 0; s2 = 0;
    foreach (codes[i]) begin s += codes[i]; s2 += real'(codes[i]) * codes[i]; end
    m = s / codes.size(); sd = $sqrt(s2 / codes.size() - m * m);
    $display("Gaussian: mean %f sd %f (set 1500, 120)", m, sd);
    check(m > 1455.0 && m < 1545.0, "Gaussian mean");
    check(sd > 110.0 && sd < 130.0, "Gaussian deviation");

    // cyclical signal: fixed height, fixed period
    cfg.y_thr = 16'hFFFF; cfg.g_sigma = 12'd0; cfg.nai_thr = 17'd65536;
    run(200);
    minc = 4096; maxc = -1; ming = 1 << 30; maxg = -1;
    foreach (codes[i]) begin
      if (codes[i] < minc) minc = codes[i];
      if (codes[i] > maxc) maxc = codes[i];
    end
    foreach (gaps[i]) begin
      if (gaps[i] < ming) ming = gaps[i];
      if (gaps[i] > maxg) maxg = gaps[i];
    end
    $display("cyclical: heights %0d..%0d, period %0d..%0d clocks", minc, maxc, ming, maxg);
    check(maxc - minc <= 1, "cyclical: one channel");
    check(maxg - ming <= 5, "cyclical: constant period");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (12_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
