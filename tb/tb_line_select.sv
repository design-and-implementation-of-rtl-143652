// tb_line_select: self-checking test of the photoelectric-line source.
//
// Random words drive the block; each registered output (line, crystal,
// amplitude) is compared with a model written here. With the 60/122/250 keV
// thresholds (NaI 100 %, 75 %, 20 %) the NaI fraction per line over 30 000
// draws must match, lines must be equally likely, and amplitudes must clamp at
// both ends of the DAC range.
module tb_line_select;
  import siggen_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [15:0] rnd_line, rnd_xtal;
  logic signed [CTR_W-1:0] centered;
  line_cfg_t [N_LINES-1:0] lines;
  logic [DAC_W-1:0] amp;
  xtal_e xtal;
  logic [1:0] line;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  line_select dut (.clk, .rst_n, .rnd_line, .rnd_xtal, .centered, .lines, .amp, .xtal, .line);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  function automatic int model_amp(input int mean, input int sigma, input longint c);
    longint v;
    v = longint'(mean) + ((c * longint'(sigma)) >>> 16);
    if (v < 0) return 0;
    if (v > 4095) return 4095;
    return int'(v);
  endfunction

  int nsel [3], nnai [3];
  int e_line, e_amp;
  bit e_nai;

  initial begin
    lines[0] = '{nai_thr: THR_60KEV,  nai_mean: 12'd600,  csi_mean: 12'd700,  sigma: 12'd20};
    lines[1] = '{nai_thr: THR_122KEV, nai_mean: 12'd1500, csi_mean: 12'd720,  sigma: 12'd30};
    lines[2] = '{nai_thr: THR_250KEV, nai_mean: 12'd3000, csi_mean: 12'd1600, sigma: 12'd40};
    rnd_line = 0; rnd_xtal = 0; centered = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int k = 0; k < 30000; k++) begin
      rnd_line = 16'($urandom);
      rnd_xtal = 16'($urandom);
      centered = CTR_W'($signed(21'($urandom_range(0, 786420))) - 21'sd393216);
      e_line = (int'(rnd_line) * 3) >> 16;
      e_nai  = int'(rnd_xtal) < int'(lines[e_line].nai_thr);
      e_amp  = model_amp(e_nai ? int'(lines[e_line].nai_mean) : int'(lines[e_line].csi_mean),
                         int'(lines[e_line].sigma), longint'(centered));
      @(posedge clk); #1;
      check(int'(line) == e_line, "line index");
      check((xtal == XTAL_NAI) == e_nai, "crystal by threshold");
      check(int'(amp) == e_amp, $sformatf("amplitude %0d vs %0d", amp, e_amp));
      nsel[line]++;
      if (xtal == XTAL_NAI) nnai[line]++;
    end
    for (int i = 0; i < 3; i++)
      $display("line %0d: %0d draws, NaI fraction %f", i, nsel[i], real'(nnai[i]) / nsel[i]);
    check(nnai[0] == nsel[0], "60 keV: all NaI");
    check(real'(nnai[1]) / nsel[1] > 0.72 && real'(nnai[1]) / nsel[1] < 0.78, "122 keV: 75 % NaI");
    check(real'(nnai[2]) / nsel[2] > 0.17 && real'(nnai[2]) / nsel[2] < 0.23, "250 keV: 20 % NaI");
    for (int i = 0; i < 3; i++) check(nsel[i] > 9400 && nsel[i] < 10600, "lines equally likely");
    // clamping at both ends
    lines[0].nai_mean = 12'd5; lines[0].sigma = 12'd4000;
    rnd_line = 16'd0; rnd_xtal = 16'd0; centered = -21'sd393216;
    @(posedge clk); #1 check(amp == 0, "clamp at 0");
    centered = 21'sd393200;
    @(posedge clk); #1 check(amp == 12'hFFF, "clamp at full scale");
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
