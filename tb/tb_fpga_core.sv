// tb_fpga_core: self-checking test of the FPGA core in all four amplitude modes.
//
// Short square/blank widths (20 clocks each) keep the run short. A spectrum
// with counts only in channels 100 (1000) and 300 (3000) is loaded; lines use
// zero width so every amplitude is exactly a configured peak. For each mode,
// 400 pulses are collected and checked:
//   every pulse: DAC written with the amplitude on the first square clock,
//     exactly one channel's switch1/switch2 closed for 20 clocks, DAC back to 0;
//   lines: amplitude equals the peak of the crystal whose switches close, and
//     the NaI fraction per line follows 100 % / 75 % / 20 %;
//   Gaussian: sample mean and deviation near 2048 and 200;
//   uniform: amplitudes spread over the whole DAC range, mean near 2048;
//   spectrum: only codes 400 and 1200, in the ratio 1 : 3;
//   the idle time between pulses has the geometric mean 5/p clocks.
// Stalls (waiting for the sampler) and dropped events must both occur.
module tb_fpga_core;
  import siggen_pkg::*;
  localparam int SQ = 20, BL = 20;
  logic clk = 1'b0, rst_n = 1'b0;
  cfg_t cfg;
  logic ram_we = 1'b0;
  logic [CH_W-1:0] ram_waddr = '0;
  logic [CNT_W-1:0] ram_wdata = '0;
  logic [DAC_W-1:0] dac_data;
  logic dac_wr, pulse_start, missed, stalled, busy, spec_accept;
  logic [1:0] sw1, sw2;
  xtal_e pulse_xtal;
  int checks = 0, failures = 0;

  always #10 clk = ~clk;

  fpga_core #(.SQ_CYCLES(SQ), .BLANK_CYCLES(BL)) dut (
    .clk, .rst_n, .cfg, .ram_we, .ram_waddr, .ram_wdata, .dac_data, .dac_wr, .sw1, .sw2,
    .pulse_xtal, .pulse_start, .missed, .stalled, .busy, .spec_accept);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s at %0t", what, $time);
    end
  endtask

  // per-pulse bookkeeping, sampled every clock
  int cyc = 0, sq_len = -1, sq_x = 0, last_idle = -1, idle_sum = 0, idle_n = 0;
  int nstall = 0, nmiss = 0;
  bit collect = 0, was_busy = 0;
  int amps [$];
  int xt [$];

  always @(posedge clk) begin
    #1;
    cyc++;
    if (stalled) nstall++;
    if (missed) nmiss++;
    if (pulse_start) begin
      check(dac_wr, "DAC written on first square clock");
      check($onehot(sw1) && sw1 == sw2, "one channel switched");
      if (last_idle >= 0 && cfg.mode != MODE_SPECTRUM) begin
        idle_sum += cyc - last_idle;
        idle_n++;
      end
      if (collect) begin
        amps.push_back(int'(dac_data));
        xt.push_back(sw1[1] ? 1 : 0);
      end
      sq_len = 1;
      sq_x = sw1[1];
    end else if (sq_len > 0) begin
      if (sw1 != 0) begin
        sq_len++;
        check(sw1[sq_x] && sw2[sq_x], "same channel for the whole square");
      end else begin
        check(sq_len == SQ, "square width");
        check(dac_wr && dac_data == 0, "DAC returns to 0");
        sq_len = -1;
      end
    end
    if (!busy && was_busy) last_idle = cyc;
    was_busy = busy;
  end

  task automatic collect_pulses(input mode_e m, input int n);
    cfg.mode = m;
    repeat (50) @(posedge clk);
    amps.delete(); xt.delete();
    collect = 1;
    wait (amps.size() >= n);
    collect = 0;
  endtask

  real s, s2, mean, sd;
  int nl [3][2];
  int lo, hi;

  initial begin
    cfg = '0;
    cfg.mode    = MODE_UNIFORM;
    cfg.y_thr   = Y_DEFAULT;
    cfg.nai_thr = 17'd32768;
    cfg.g_mean  = 12'd2048;
    cfg.g_sigma = 12'd200;
    cfg.b_range = 17'd3000;   // peak count
    cfg.lines[0] = '{nai_thr: THR_60KEV,  nai_mean: 12'd600,  csi_mean: 12'd650,  sigma: 12'd0};
    cfg.lines[1] = '{nai_thr: THR_122KEV, nai_mean: 12'd1220, csi_mean: 12'd700,  sigma: 12'd0};
    cfg.lines[2] = '{nai_thr: THR_250KEV, nai_mean: 12'd2500, csi_mean: 12'd1450, sigma: 12'd0};
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    ram_we = 1'b1;
    for (int i = 0; i < 1024; i++) begin
      ram_waddr = 10'(i);
      ram_wdata = (i == 100) ? 16'd1000 : (i == 300) ? 16'd3000 : 16'd0;
      @(posedge clk); #1;
    end
    ram_we = 1'b0;

    // photoelectric lines
    collect_pulses(MODE_LINES, 600);
    for (int i = 0; i < amps.size(); i++) begin
      int l;
      l = -1;
      for (int j = 0; j < 3; j++)
        if (amps[i] == (xt[i] ? int'(cfg.lines[j].csi_mean) : int'(cfg.lines[j].nai_mean))) l = j;
      check(l >= 0, "line amplitude is the switched crystal's peak");
      if (l >= 0) nl[l][xt[i]]++;
    end
    for (int j = 0; j < 3; j++) $display("line %0d: NaI %0d CsI %0d", j, nl[j][0], nl[j][1]);
    check(nl[0][1] == 0 && nl[0][0] > 150, "60 keV all NaI");
    check(real'(nl[1][0]) / (nl[1][0] + nl[1][1]) > 0.62 && real'(nl[1][0]) / (nl[1][0] + nl[1][1]) < 0.86, "122 keV 75 % NaI");
    check(real'(nl[2][0]) / (nl[2][0] + nl[2][1]) > 0.10 && real'(nl[2][0]) / (nl[2][0] + nl[2][1]) < 0.30, "250 keV 20 % NaI");

    // Gaussian
    collect_pulses(MODE_GAUSS, 400);
    s = 0; s2 = 0;
    foreach (amps[i]) begin s += amps[i]; s2 += real'(amps[i]) * amps[i]; end
    mean = s / amps.size(); sd = $sqrt(s2 / amps.size() - mean * mean);
    $display("gauss mean %f sd %f", mean, sd);
    check(mean > 2018 && mean < 2078, "Gaussian mean");
    check(sd > 175 && sd < 225, "Gaussian deviation");

    // uniform
    collect_pulses(MODE_UNIFORM, 400);
    s = 0; lo = 4096; hi = -1;
    foreach (amps[i]) begin s += amps[i]; if (amps[i] < lo) lo = amps[i]; if (amps[i] > hi) hi = amps[i]; end
    $display("uniform mean %f min %0d max %0d", s / amps.size(), lo, hi);
    check(s / amps.size() > 1900 && s / amps.size() < 2200, "uniform mean");
    check(lo < 100 && hi > 4000, "uniform spread");

    // loaded spectrum
    collect_pulses(MODE_SPECTRUM, 1200);
    begin
      int n400 = 0, n1200 = 0;
      foreach (amps[i]) begin
        if (amps[i] == 400) n400++;
        else if (amps[i] == 1200) n1200++;
        else check(0, "spectrum amplitude from an empty channel");
      end
      $display("spectrum: code 400 x%0d, code 1200 x%0d", n400, n1200);
      check(real'(n1200) / n400 > 2.4 && real'(n1200) / n400 < 3.8, "spectrum ratio 1:3");
    end

    $display("mean idle %f clocks (geometric 5/p = %f), stalls %0d, dropped %0d",
             real'(idle_sum) / idle_n, 5.0 * 65536.0 / 2000.0, nstall, nmiss);
    check(real'(idle_sum) / idle_n > 150.0 && real'(idle_sum) / idle_n < 180.0, "geometric idle time");
    check(nstall > 0, "stall occurred");
    check(nmiss > 0, "dropped event occurred");
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
