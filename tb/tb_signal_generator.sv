// tb_signal_generator: end-to-end test of the complete generator at its
// default parameters (50 MHz clock, test every 0.1 us, 5 us square wave,
// 5 us blanking, NaI 230 ns / CsI 630 ns / forming 300 ns).
//
// A spectrum with the shape of a low-energy source measurement (a narrow peak,
// a main photopeak and a falling continuum, generated by formula here) is
// loaded into the spectrum RAM. The generator then runs in each of its four
// amplitude modes. For every pulse the analog output's peak is compared with
// the DAC voltage times the shaper's peak gain, computed here in closed form
// for the crystal whose switches closed; outside the square wave the output
// must be exactly 0 (negative pulse removed). Counted and required at least
// once: NaI pulses, CsI pulses, each mode, a stall waiting for the rejection
// sampler, a rejected try, an event dropped during a pulse. The 60/122/250 keV
// line mode must split NaI/CsI as 100/75/20 %, the idle time between pulses
// must have the geometric mean 5/p clocks, and the spectrum mode's amplitudes
// must follow the loaded spectrum (share of the main-peak region).
module tb_signal_generator;
  import siggen_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  cfg_t cfg;
  logic ram_we = 1'b0;
  logic [CH_W-1:0] ram_waddr = '0;
  logic [CNT_W-1:0] ram_wdata = '0;
  real vout, v_dac, v_nai, v_csi;
  logic [DAC_W-1:0] dac_data;
  logic dac_wr, pulse_start, missed, stalled, busy, spec_accept;
  logic [1:0] sw1, sw2;
  int checks = 0, failures = 0;

  always #10 clk = ~clk;   // 50 MHz

  signal_generator dut (
    .clk, .rst_n, .cfg, .ram_we, .ram_waddr, .ram_wdata, .vout, .dac_data, .dac_wr,
    .sw1, .sw2, .v_dac, .v_nai, .v_csi, .pulse_start, .missed, .stalled, .busy, .spec_accept);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s at %0t", what, $time);
    end
  endtask

  // Spectrum shape: counts per channel.
  function automatic int spec(input int ch);
    real x, d1, d2;
    d1 = (real'(ch) - 12.0) / 3.0;
    d2 = (real'(ch) - 240.0) / 20.0;
    x = 400.0 * $exp(-d1 * d1)              // narrow low-energy peak
      + 3000.0 * $exp(-d2 * d2)             // main photopeak
      + 600.0 * $exp(-real'(ch) / 200.0);   // continuum
    return int'(x);
  endfunction

  function automatic real peak_gain(input real rc);
    real g = 0.0, v;
    for (int k = 1; k <= 250; k++) begin
      v = rc / (rc - 300.0) * ($exp(-20.0 * k / rc) - $exp(-20.0 * k / 300.0));
      if (v > g) g = v;
    end
    return g;
  endfunction

  real gain [2];
  int cyc = 0, in_sq = 0, sq_x = 0, sq_code = 0, was_busy = 0, idle_start = -1;
  real pk;
  int n_x [2], n_mode [4], n_stall = 0, n_miss = 0, n_try = 0, n_acc = 0;
  int idle_sum = 0, idle_n = 0, n_peak_bad = 0;
  int nl_nai [3], nl_all [3];
  int spec_amps [$];
  bit collect = 0;

  always @(posedge clk) begin
    #1;
    cyc++;
    if (stalled) n_stall++;
    if (missed) n_miss++;
    if (rst_n && !ram_we) begin n_try++; if (spec_accept) n_acc++; end
    if (pulse_start) begin
      in_sq = 1; pk = 0.0; sq_x = sw1[1]; sq_code = int'(dac_data);
      if (collect) begin
        n_x[sq_x]++;
        n_mode[cfg.mode]++;
        if (cfg.mode == MODE_SPECTRUM) spec_amps.push_back(sq_code);
        if (cfg.mode == MODE_LINES)
          for (int j = 0; j < 3; j++)
            if (sq_code == int'(cfg.lines[j].nai_mean) && !sq_x) begin nl_nai[j]++; nl_all[j]++; end
            else if (sq_code == int'(cfg.lines[j].csi_mean) && sq_x) nl_all[j]++;
        if (idle_start >= 0 && cfg.mode != MODE_SPECTRUM) begin
          idle_sum += cyc - idle_start; idle_n++;
        end
      end
    end
    if (in_sq) begin
      if (vout > pk) pk = vout;
      if (sw2 == 0) begin
        real e;
        e = real'(sq_code) * 3.3 / 4096.0 * gain[sq_x];
        if (!(pk > e * 0.995 - 1e-3 && pk < e * 1.005 + 1e-3)) n_peak_bad++;
        check(pk > e * 0.995 - 1e-3 && pk < e * 1.005 + 1e-3,
              $sformatf("pulse peak %f V, expected %f V", pk, e));
        in_sq = 0;
      end
    end else begin
      check(vout == 0.0, "output is zero outside a pulse");
    end
    if (!busy && was_busy) idle_start = cyc;
    was_busy = busy;
  end

  task automatic run_mode(input mode_e m, input int n);
    int start;
    cfg.mode = m;
    repeat (700) @(posedge clk);
    start = n_mode[m];
    collect = 1;
    while (n_mode[m] - start < n) @(posedge clk);
    $display("mode %0d done at cycle %0d", m, cyc);
    collect = 0;
  endtask

  int total, in_peak, exp_in_peak;

  initial begin
    gain[0] = peak_gain(230.0);
    gain[1] = peak_gain(630.0);
    $display("spec(240)=%0d spec(12)=%0d gains %f %f", spec(240), spec(12), gain[0], gain[1]);
    cfg = '0;
    cfg.y_thr   = Y_DEFAULT;
    cfg.nai_thr = 17'd32768;
    cfg.g_mean  = 12'd1800;
    cfg.g_sigma = 12'd150;
    cfg.b_range = 17'(spec(240) + 1);  // just above the peak count
    cfg.lines[0] = '{nai_thr: THR_60KEV,  nai_mean: 12'd640,  csi_mean: 12'd560,  sigma: 12'd0};
    cfg.lines[1] = '{nai_thr: THR_122KEV, nai_mean: 12'd1520, csi_mean: 12'd700,  sigma: 12'd0};
    cfg.lines[2] = '{nai_thr: THR_250KEV, nai_mean: 12'd3000, csi_mean: 12'd1630, sigma: 12'd0};
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    ram_we = 1'b1;
    for (int i = 0; i < 1024; i++) begin
      ram_waddr = 10'(i); ram_wdata = 16'(spec(i));
      @(posedge clk); #1;
    end
    ram_we = 1'b0;

    run_mode(MODE_UNIFORM, 100);
    run_mode(MODE_GAUSS, 100);
    run_mode(MODE_LINES, 600);
    cfg.b_range = 17'd65536;   // full range: slow acceptance, forces stalls
    run_mode(MODE_SPECTRUM, 60);
    spec_amps.delete();
    cfg.b_range = 17'(spec(240) + 1);
    run_mode(MODE_SPECTRUM, 600);

    // photoelectric split (Table-1 fractions)
    for (int j = 0; j < 3; j++) $display("line %0d: %0d pulses, NaI %0d", j, nl_all[j], nl_nai[j]);
    check(nl_all[0] > 150 && nl_nai[0] == nl_all[0], "60 keV all NaI");
    check(real'(nl_nai[1]) / nl_all[1] > 0.65 && real'(nl_nai[1]) / nl_all[1] < 0.85, "122 keV 75 % NaI");
    check(real'(nl_nai[2]) / nl_all[2] > 0.12 && real'(nl_nai[2]) / nl_all[2] < 0.28, "250 keV 20 % NaI");
    check(nl_all[0] + nl_all[1] + nl_all[2] == 600, "every line pulse at a configured peak");

    // spectrum shape: share of pulses in the main-peak region 200..280
    total = 0; exp_in_peak = 0;
    for (int i = 0; i < 1024; i++) begin
      total += spec(i);
      if (i >= 200 && i < 280) exp_in_peak += spec(i);
    end
    in_peak = 0;
    foreach (spec_amps[i]) if (spec_amps[i] / 4 >= 200 && spec_amps[i] / 4 < 280) in_peak++;
    $display("spectrum: %0d pulses, main-peak share %f (loaded %f)", spec_amps.size(),
             real'(in_peak) / spec_amps.size(), real'(exp_in_peak) / total);
    check(real'(in_peak) / spec_amps.size() > real'(exp_in_peak) / total - 0.07 &&
          real'(in_peak) / spec_amps.size() < real'(exp_in_peak) / total + 0.07, "spectrum shape");

    $display("mechanisms: NaI %0d CsI %0d | modes U %0d G %0d L %0d S %0d | stalls %0d | tries %0d accepted %0d | dropped %0d",
             n_x[0], n_x[1], n_mode[0], n_mode[1], n_mode[2], n_mode[3], n_stall, n_try, n_acc, n_miss);
    $display("mean idle %f clocks, geometric mean 5/p = %f", real'(idle_sum) / idle_n, 5.0 * 65536.0 / 2000.0);
    check(n_x[0] > 0 && n_x[1] > 0, "both channels used");
    for (int m = 0; m < 4; m++) check(n_mode[m] > 0, "every mode used");
    check(n_stall > 0, "stall for an amplitude occurred");
    check(n_try > n_acc && n_acc > 0, "rejections and acceptances occurred");
    check(n_miss > 0, "event dropped during a pulse");
    check(real'(idle_sum) / idle_n > 150.0 && real'(idle_sum) / idle_n < 180.0, "negative-exponential spacing");
    check(n_peak_bad == 0, "all pulse peaks match");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog stalls=%0d acc=%0d tries=%0d busy=%0d st=%0d", n_stall, n_acc, n_try, busy, dut.u_fpga.u_ctrl.state_q);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
