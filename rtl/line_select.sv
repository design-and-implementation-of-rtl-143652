// line_select: photoelectric-line amplitude source with NaI/CsI split by
// threshold comparison.
//
// Each clock one of N_LINES X-ray lines is picked with equal probability from
// rnd_line (line = rnd_line * N_LINES / 2^16). The uniform word rnd_xtal is
// compared with that line's threshold: below it the photon counts as absorbed
// in NaI, otherwise in CsI. The amplitude is a Gaussian around the chosen
// crystal's peak, built from the centred 12-fold M-sequence sum. Outputs are
// registered, so a fresh candidate (amp, xtal, line) is ready every clock.
//
// Following the published generator: the threshold rule and its NaI
// fractions (100 %, 75 %, 20 % for 60, 122, 250 keV), Gaussian peaks per
// crystal. Chosen here: equal line probabilities, 17-bit thresholds so 100 %
// can be written, peaks and widths as run-time inputs.
module line_select
  import siggen_pkg::*;
#(
  parameter int unsigned NL = N_LINES
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [RND_W-1:0]          rnd_line,
  input  logic [RND_W-1:0]          rnd_xtal,
  input  logic signed [CTR_W-1:0]   centered,
  input  line_cfg_t [NL-1:0]        lines,
  output logic [DAC_W-1:0]          amp,
  output xtal_e                     xtal,
  output logic [$clog2(NL+1)-1:0]   line
);
  localparam int unsigned LW = $clog2(NL + 1);

  logic [RND_W+LW-1:0] scaled;
  logic [LW-1:0]       line_d;
  xtal_e               xtal_d;
  logic [DAC_W-1:0]    mean_d;

  always_comb begin
    scaled = (RND_W+LW)'(rnd_line) * (RND_W+LW)'(NL);
    line_d = scaled[RND_W+LW-1:RND_W];
    xtal_d = ({1'b0, rnd_xtal} < lines[line_d].nai_thr) ? XTAL_NAI : XTAL_CSI;
    mean_d = (xtal_d == XTAL_NAI) ? lines[line_d].nai_mean : lines[line_d].csi_mean;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      amp  <= '0;
      xtal <= XTAL_NAI;
      line <= '0;
    end else begin
      amp  <= gauss_amp(mean_d, lines[line_d].sigma, centered);
      xtal <= xtal_d;
      line <= line_d;
    end
  end

endmodule
