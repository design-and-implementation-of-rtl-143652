// fpga_core: the digital part of the scintillator-pulse generator (the FPGA).
//
// Uniform 16-bit random words come from separate M-sequence generators
// ("equality random"), each with its own seed; words that are combined come
// from registers of different lengths (see below). From them:
//   gauss_random      - sum of 12 M sequences, approximately Gaussian;
//   line_select       - photoelectric lines, NaI/CsI split by threshold;
//   rejection_sampler - amplitudes following a spectrum loaded into RAM;
//   output_dist       - picks the amplitude law by cfg.mode;
//   interval_gen      - a test every TEST_DIV clocks, event when rnd < Y;
//   pulse_ctrl        - on an event: amplitude to the DAC, switch1/switch2 of
//                       the chosen crystal's channel, blanking afterwards.
// Interface: cfg is static configuration; ram_* loads the spectrum (one word
// per clock); dac_data/dac_wr go to a parallel DAC; sw1/sw2 drive the analog
// switches of the NaI ([0]) and CsI ([1]) channels. The status strobes are for
// counting. Timing: an event reaches the DAC two clocks after its test strobe
// when an amplitude is ready.
//
// The block structure follows the published FPGA diagram (equality random
// feeding output distribution, Gaussian random and the time-interval test,
// which drives DAC and switches). Clock rate, widths and configuration layout
// are this design's choices.
module fpga_core
  import siggen_pkg::*;
#(
  parameter int unsigned TEST_DIV     = 5,
  parameter int unsigned SQ_CYCLES    = 250,
  parameter int unsigned BLANK_CYCLES = 250
) (
  input  logic             clk,
  input  logic             rst_n,
  input  cfg_t             cfg,
  input  logic             ram_we,
  input  logic [CH_W-1:0]  ram_waddr,
  input  logic [CNT_W-1:0] ram_wdata,
  output logic [DAC_W-1:0] dac_data,
  output logic             dac_wr,
  output logic [1:0]       sw1,
  output logic [1:0]       sw2,
  output xtal_e            pulse_xtal,   // crystal of the pulse in progress
  output logic             pulse_start,
  output logic             missed,
  output logic             stalled,
  output logic             busy,
  output logic             spec_accept
);

  localparam logic [15:0] POLY16 = 16'hB400;    // x^16+x^14+x^13+x^11+1
  localparam logic [16:0] POLY17 = 17'h12000;   // x^17+x^14+1
  localparam logic [17:0] POLY18 = 18'h20400;   // x^18+x^11+1
  localparam logic [18:0] POLY19 = 19'h72000;   // x^19+x^18+x^17+x^14+1
  localparam logic [22:0] POLY23 = 23'h420000;  // x^23+x^18+1

  logic [RND_W-1:0] rnd_int, rnd_u, rnd_line, rnd_xtal, rnd_a, rnd_b;
  logic             tick, z;

  // The interval source advances once per test, not once per clock: 16 shifts
  // per word and one word per test keep the stride coprime with 2^16 - 1, so
  // the tests see the whole sequence (5 words per test, a stride of 80 shifts,
  // would cycle through only a fifth of it and bias p).
  mseq #(.W(16), .TAPS(POLY16), .SEED(16'hACE1)) u_rnd_int (.clk, .rst_n, .en(tick), .rnd(rnd_int));
  mseq #(.W(16), .TAPS(POLY16), .SEED(16'h3B97)) u_rnd_a   (.clk, .rst_n, .en(1'b1), .rnd(rnd_a));

  // Words that are used together (channel A with count B, line with crystal)
  // come from M sequences of different lengths. Equal-length registers stepped
  // together repeat their pairs after 2^16 - 1 clocks, so each value of one
  // word would only ever meet a fixed set of values of the other; with
  // periods 2^16-1, 2^17-1, 2^19-1 and 2^23-1 the joint sequence is far longer
  // than any run. The low 16 bits of the longer registers are used.
  // Pulses always start on the same phase of the 5-clock test period, so the
  // uniform amplitude word is read only every 5k clocks; its register
  // (18 bits, period 2^18-1, coprime with 5) still reaches all its states.
  logic [17:0] st_u;
  logic [16:0] st_b;
  logic [18:0] st_line;
  logic [22:0] st_xtal;
  mseq #(.W(18), .TAPS(POLY18), .SEED(18'h05A3C))  u_rnd_u    (.clk, .rst_n, .en(1'b1), .rnd(st_u));
  mseq #(.W(17), .TAPS(POLY17), .SEED(17'h0C4D2))  u_rnd_b    (.clk, .rst_n, .en(1'b1), .rnd(st_b));
  mseq #(.W(19), .TAPS(POLY19), .SEED(19'h30F0F))  u_rnd_line (.clk, .rst_n, .en(1'b1), .rnd(st_line));
  mseq #(.W(23), .TAPS(POLY23), .SEED(23'h17E11))  u_rnd_xtal (.clk, .rst_n, .en(1'b1), .rnd(st_xtal));
  assign rnd_u    = st_u[RND_W-1:0];
  assign rnd_b    = st_b[RND_W-1:0];
  assign rnd_line = st_line[RND_W-1:0];
  assign rnd_xtal = st_xtal[RND_W-1:0];

  logic [SUM_W-1:0]        g_sum;
  logic signed [CTR_W-1:0] g_ctr;

  gauss_random u_gauss (.clk, .rst_n, .sum(g_sum), .centered(g_ctr));

  logic [DAC_W-1:0]            line_amp;
  xtal_e                       line_xtal;
  logic [$clog2(N_LINES+1)-1:0] line_idx;

  line_select u_lines (
    .clk, .rst_n, .rnd_line, .rnd_xtal, .centered(g_ctr), .lines(cfg.lines),
    .amp(line_amp), .xtal(line_xtal), .line(line_idx)
  );

  logic            spec_valid, spec_ready;
  logic [CH_W-1:0] spec_channel;

  rejection_sampler u_rej (
    .clk, .rst_n, .rnd_a, .rnd_b, .b_range(cfg.b_range),
    .ram_we, .ram_waddr, .ram_wdata,
    .valid(spec_valid), .ready(spec_ready), .channel(spec_channel),
    .accept(spec_accept)
  );

  logic             amp_valid, amp_ready;
  logic [DAC_W-1:0] amp;
  xtal_e            amp_xtal;

  output_dist u_dist (
    .clk, .rst_n, .mode(cfg.mode), .nai_thr(cfg.nai_thr),
    .g_mean(cfg.g_mean), .g_sigma(cfg.g_sigma),
    .rnd_u, .rnd_xtal, .centered(g_ctr),
    .line_amp, .line_xtal,
    .spec_valid, .spec_ready, .spec_channel,
    .valid(amp_valid), .ready(amp_ready), .amp, .xtal(amp_xtal)
  );

  interval_gen #(.TEST_DIV(TEST_DIV)) u_int (
    .clk, .rst_n, .rnd(rnd_int), .y_thr(cfg.y_thr), .tick, .z
  );

  pulse_ctrl #(.SQ_CYCLES(SQ_CYCLES), .BLANK_CYCLES(BLANK_CYCLES)) u_ctrl (
    .clk, .rst_n, .z, .amp_valid, .amp_ready, .amp, .xtal(amp_xtal),
    .dac_data, .dac_wr, .sw1, .sw2, .pulse_start, .missed, .stalled, .busy
  );

  assign pulse_xtal = sw1[1] ? XTAL_CSI : XTAL_NAI;

endmodule
