// tb_output_dist: self-checking test of the amplitude-law selector.
//
// For each mode the output (valid, amplitude, crystal, spec_ready) is compared
// with a model of the registered sources written here: the top 12 bits of the
// uniform word, the Gaussian formula, the line source passed through, and the
// spectrum channel scaled by 4 with valid/ready forwarded.
module tb_output_dist;
  import siggen_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  mode_e mode;
  logic [THR_W-1:0] nai_thr;
  logic [DAC_W-1:0] g_mean, g_sigma, line_amp, amp;
  logic [15:0] rnd_u, rnd_xtal;
  logic signed [CTR_W-1:0] centered;
  xtal_e line_xtal, xtal;
  logic spec_valid, spec_ready, valid, ready;
  logic [CH_W-1:0] spec_channel;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  output_dist dut (.clk, .rst_n, .mode, .nai_thr, .g_mean, .g_sigma, .rnd_u, .rnd_xtal, .centered,
                   .line_amp, .line_xtal, .spec_valid, .spec_ready, .spec_channel,
                   .valid, .ready, .amp, .xtal);

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

  int nnai = 0;

  initial begin
    mode = MODE_UNIFORM; nai_thr = 17'd16384; g_mean = 12'd2000; g_sigma = 12'd100;
    rnd_u = 0; rnd_xtal = 0; centered = 0; line_amp = 0; line_xtal = XTAL_NAI;
    spec_valid = 0; spec_channel = 0; ready = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int m = 0; m < 4; m++) begin
      mode = mode_e'(m);
      for (int k = 0; k < 4000; k++) begin
        int e_uni, e_gau; bit e_nai;
        rnd_u = 16'($urandom); rnd_xtal = 16'($urandom);
        centered = CTR_W'($signed(21'($urandom_range(0, 786420))) - 21'sd393216);
        e_uni = int'(rnd_u) >> 4;
        e_gau = model_amp(int'(g_mean), int'(g_sigma), longint'(centered));
        e_nai = int'(rnd_xtal) < int'(nai_thr);
        @(posedge clk); #1;
        line_amp = 12'($urandom); line_xtal = xtal_e'($urandom_range(0, 1));
        spec_valid = 1'($urandom); spec_channel = 10'($urandom); ready = 1'($urandom);
        #1;
        case (mode)
          MODE_UNIFORM: check(valid && int'(amp) == e_uni, "uniform amplitude");
          MODE_GAUSS:   check(valid && int'(amp) == e_gau, "gaussian amplitude");
          MODE_LINES:   check(valid && amp == line_amp && xtal == line_xtal, "line source");
          default:      check(valid == spec_valid && amp == {spec_channel, 2'b00} &&
                              spec_ready == ready, "spectrum source");
        endcase
        if (mode != MODE_SPECTRUM) check(!spec_ready, "sampler untouched outside spectrum mode");
        if (mode != MODE_LINES) begin
          check((xtal == XTAL_NAI) == e_nai, "crystal by global threshold");
          if (xtal == XTAL_NAI) nnai++;
        end
      end
    end
    $display("NaI fraction %f (threshold 25 %%)", real'(nnai) / 12000);
    check(real'(nnai) / 12000 > 0.23 && real'(nnai) / 12000 < 0.27, "NaI fraction");
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
