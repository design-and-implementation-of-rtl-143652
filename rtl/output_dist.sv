// output_dist: the "output distribution" stage - picks the amplitude law.
//
// By cfg mode the next pulse's amplitude (a DAC code) comes from
//   MODE_UNIFORM  : the top DAC_W bits of a uniform M-sequence word,
//   MODE_GAUSS    : a Gaussian of mean g_mean and deviation g_sigma,
//   MODE_LINES    : the photoelectric-line source (line_select),
//   MODE_SPECTRUM : the rejection sampler's channel, scaled to DAC_W bits.
// In every mode but MODE_LINES the crystal is NaI if rnd_xtal < nai_thr.
// The first three sources have a new registered candidate every clock, so
// valid is always 1; in MODE_SPECTRUM valid follows the sampler and ready is
// passed back to it. The consumer takes (amp, xtal) in the clock where
// valid && ready.
//
// Following the published generator: the four distributions (flat, Gaussian,
// lines split by threshold, loaded spectrum by rejection). Chosen here: mode
// selection as a run-time input and the crystal split outside MODE_LINES.
module output_dist
  import siggen_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  mode_e                   mode,
  input  logic [THR_W-1:0]        nai_thr,
  input  logic [DAC_W-1:0]        g_mean,
  input  logic [DAC_W-1:0]        g_sigma,
  input  logic [RND_W-1:0]        rnd_u,
  input  logic [RND_W-1:0]        rnd_xtal,
  input  logic signed [CTR_W-1:0] centered,
  // photoelectric-line source
  input  logic [DAC_W-1:0]        line_amp,
  input  xtal_e                   line_xtal,
  // rejection sampler
  input  logic                    spec_valid,
  output logic                    spec_ready,
  input  logic [CH_W-1:0]         spec_channel,
  // to the pulse controller
  output logic                    valid,
  input  logic                    ready,
  output logic [DAC_W-1:0]        amp,
  output xtal_e                   xtal
);

  logic [DAC_W-1:0] uni_q, gau_q;
  xtal_e            xtal_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      uni_q  <= '0;
      gau_q  <= '0;
      xtal_q <= XTAL_NAI;
    end else begin
      uni_q  <= rnd_u[RND_W-1 -: DAC_W];
      gau_q  <= gauss_amp(g_mean, g_sigma, centered);
      xtal_q <= ({1'b0, rnd_xtal} < nai_thr) ? XTAL_NAI : XTAL_CSI;
    end
  end

  always_comb begin
    spec_ready = 1'b0;
    valid      = 1'b1;
    xtal       = xtal_q;
    unique case (mode)
      MODE_UNIFORM:  amp = uni_q;
      MODE_GAUSS:    amp = gau_q;
      MODE_LINES: begin
        amp  = line_amp;
        xtal = line_xtal;
      end
      MODE_SPECTRUM: begin
        amp        = DAC_W'({spec_channel, {(DAC_W-CH_W){1'b0}}});
        valid      = spec_valid;
        spec_ready = ready;
      end
      default: amp = uni_q;
    endcase
  end

endmodule
