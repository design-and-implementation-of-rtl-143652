// siggen_pkg: types and constants shared by the scintillator-pulse generator.
//
// The random-number width (16 bits), the number of summed M sequences (12),
// the three simulated X-ray lines with their NaI/CsI fractions (60 keV 100 %,
// 122 keV 75 %, 250 keV 20 % in NaI) and the interval threshold Y = 2000 follow
// the published design. The DAC width, the spectrum-RAM size and the layout of
// the run-time configuration are this design's own choices.
package siggen_pkg;

  parameter int unsigned RND_W   = 16;  // width of every uniform random word
  parameter int unsigned N_GAUSS = 12;  // M sequences summed for a Gaussian
  parameter int unsigned SUM_W   = RND_W + 4;  // holds 12 * (2^16 - 1)
  parameter int unsigned CTR_W   = SUM_W + 1;  // signed, centred sum
  parameter int unsigned DAC_W   = 12;  // DAC code width
  parameter int unsigned CH_W    = 10;  // spectrum channels = 2^CH_W
  parameter int unsigned CNT_W   = 16;  // counts per spectrum channel
  parameter int unsigned N_LINES = 3;   // simultaneously simulated X-ray lines
  parameter int unsigned THR_W   = RND_W + 1;  // thresholds reach 2^16 (100 %)

  // Which amplitude distribution drives the DAC.
  typedef enum logic [1:0] {
    MODE_UNIFORM  = 2'd0,  // flat: the M sequence itself
    MODE_GAUSS    = 2'd1,  // one Gaussian peak (sum of 12 M sequences)
    MODE_LINES    = 2'd2,  // photoelectric lines split NaI/CsI by threshold
    MODE_SPECTRUM = 2'd3   // loaded spectrum, sampled by rejection
  } mode_e;

  // Which scintillator's shaping channel a pulse goes to.
  typedef enum logic {
    XTAL_NAI = 1'b0,
    XTAL_CSI = 1'b1
  } xtal_e;

  // One simulated X-ray line: NaI probability threshold, peak positions and
  // Gaussian width, all in DAC codes.
  typedef struct packed {
    logic [THR_W-1:0] nai_thr;   // NaI if uniform word < nai_thr
    logic [DAC_W-1:0] nai_mean;
    logic [DAC_W-1:0] csi_mean;
    logic [DAC_W-1:0] sigma;     // standard deviation in DAC codes
  } line_cfg_t;

  typedef struct packed {
    mode_e                           mode;
    logic [RND_W-1:0]                y_thr;    // interval threshold Y
    logic [THR_W-1:0]                nai_thr;  // crystal split outside MODE_LINES
    logic [DAC_W-1:0]                g_mean;   // MODE_GAUSS peak
    logic [DAC_W-1:0]                g_sigma;  // MODE_GAUSS standard deviation
    logic [CNT_W:0]                  b_range;  // B uniform on 0 .. b_range-1
    line_cfg_t [N_LINES-1:0]         lines;
  } cfg_t;

  // NaI fractions of Table-1 style: 100 %, 75 %, 20 % of 2^16.
  parameter logic [THR_W-1:0] THR_60KEV  = THR_W'(65536);
  parameter logic [THR_W-1:0] THR_122KEV = THR_W'(49152);
  parameter logic [THR_W-1:0] THR_250KEV = THR_W'(13107);
  parameter logic [RND_W-1:0] Y_DEFAULT  = RND_W'(2000);

  // Gaussian amplitude: mean + centred * sigma / 2^16, clamped to the DAC range.
  // With N_GAUSS = 12 the centred sum has a standard deviation of 2^16, so
  // sigma is the standard deviation of the result in DAC codes.
  function automatic logic [DAC_W-1:0] gauss_amp(input logic [DAC_W-1:0] mean,
                                                 input logic [DAC_W-1:0] sigma,
                                                 input logic signed [CTR_W-1:0] centred);
    logic signed [CTR_W+DAC_W+1:0] prod;
    logic signed [CTR_W+DAC_W+1:0] val;
    prod = centred * $signed({1'b0, sigma});
    val  = $signed({{(CTR_W+1){1'b0}}, mean}) + (prod >>> RND_W);
    if (val < 0)                           return '0;
    else if (val > (2 ** DAC_W) - 1)       return '1;
    else                                   return val[DAC_W-1:0];
  endfunction

endpackage
