// spectrum_ram: the energy spectrum used by the rejection sampler.
//
// 2^CH_W words of CNT_W bits, word i holding the count of channel i. One
// synchronous write port loads the spectrum; one synchronous read port returns
// the count of raddr one clock later (block-RAM style). The memory starts
// cleared, so an unloaded spectrum accepts no sample.
//
// Following the published generator: a measured spectrum is held in FPGA RAM.
// Chosen here: 1024 channels of 16-bit counts and the load port.
module spectrum_ram
  import siggen_pkg::*;
#(
  parameter int unsigned AW = CH_W,
  parameter int unsigned DW = CNT_W
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [DW-1:0] wdata,
  input  logic [AW-1:0] raddr,
  output logic [DW-1:0] rdata
);

  logic [DW-1:0] mem [2**AW];

  initial begin
    for (int i = 0; i < 2**AW; i++) mem[i] = '0;
  end

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

endmodule
