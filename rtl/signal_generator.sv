// signal_generator: the complete scintillator-detector pulse generator.
//
// The FPGA core decides when a pulse occurs (negative-exponential intervals),
// how large it is (flat, Gaussian, photoelectric lines or a loaded spectrum)
// and which scintillator it imitates (NaI or CsI). It writes the amplitude to
// the DAC, whose square wave enters the chosen shaping channel through
// switch1; the channel turns the rising edge into a double-exponential pulse
// (NaI 230 ns or CsI 630 ns decay, 300 ns rise constant) and switch2 passes it
// while blocking the negative pulse of the falling edge. The adder sums both
// channels into the output vout.
//
// Interface: clk (50 MHz assumed, one random test per TEST_DIV clocks), rst_n,
// static configuration cfg, a spectrum load port, the analog output vout (a
// real, in volts) and the digital signals between FPGA and analog parts for
// observation. DAC, shaping channels and adder are behavioural models, so
// this top is for simulation; fpga_core is the synthesizable part.
//
// The chain FPGA -> DAC -> switch1 -> shaping -> switch2 -> addition follows
// the published block diagram; clock rate, DAC width and reference are this
// design's choices.
module signal_generator
  import siggen_pkg::*;
#(
  parameter int unsigned TEST_DIV     = 5,
  parameter int unsigned SQ_CYCLES    = 250,
  parameter int unsigned BLANK_CYCLES = 250,
  parameter real         NAI_RC_NS    = 230.0,
  parameter real         CSI_RC_NS    = 630.0,
  parameter real         R0C0_NS      = 300.0,
  parameter real         CLK_NS       = 20.0
) (
  input  logic             clk,
  input  logic             rst_n,
  input  cfg_t             cfg,
  input  logic             ram_we,
  input  logic [CH_W-1:0]  ram_waddr,
  input  logic [CNT_W-1:0] ram_wdata,
  output real              vout,
  output logic [DAC_W-1:0] dac_data,
  output logic             dac_wr,
  output logic [1:0]       sw1,
  output logic [1:0]       sw2,
  output real              v_dac,
  output real              v_nai,
  output real              v_csi,
  output logic             pulse_start,
  output logic             missed,
  output logic             stalled,
  output logic             busy,
  output logic             spec_accept
);

  xtal_e pulse_xtal;

  fpga_core #(
    .TEST_DIV(TEST_DIV), .SQ_CYCLES(SQ_CYCLES), .BLANK_CYCLES(BLANK_CYCLES)
  ) u_fpga (
    .clk, .rst_n, .cfg, .ram_we, .ram_waddr, .ram_wdata,
    .dac_data, .dac_wr, .sw1, .sw2, .pulse_xtal,
    .pulse_start, .missed, .stalled, .busy, .spec_accept
  );

  dac_model #(.DW(DAC_W)) u_dac (
    .clk, .rst_n, .wr(dac_wr), .data(dac_data), .vout(v_dac)
  );

  shaping_channel #(.RC_NS(NAI_RC_NS), .R0C0_NS(R0C0_NS), .TS_NS(CLK_NS)) u_nai (
    .clk, .rst_n, .sw1(sw1[XTAL_NAI]), .sw2(sw2[XTAL_NAI]), .vin(v_dac), .vout(v_nai)
  );

  shaping_channel #(.RC_NS(CSI_RC_NS), .R0C0_NS(R0C0_NS), .TS_NS(CLK_NS)) u_csi (
    .clk, .rst_n, .sw1(sw1[XTAL_CSI]), .sw2(sw2[XTAL_CSI]), .vin(v_dac), .vout(v_csi)
  );

  output_adder u_add (.a(v_nai), .b(v_csi), .vout);

endmodule
