// dac_model: behavioural model of the parallel DAC that makes the square wave.
// Not synthesizable logic: it stands for an analog converter chip.
//
// On a clock edge with wr high the DW-bit code is latched; the output voltage
// is code * VREF / 2^DW and holds until the next write (zero after reset).
// The published generator uses a DAC here but names no part; the width, the
// reference voltage and the latch-on-write interface are this model's choices.
module dac_model #(
  parameter int unsigned DW   = 12,
  parameter real         VREF = 3.3
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          wr,
  input  logic [DW-1:0] data,
  output real           vout
);

  logic [DW-1:0] code_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  code_q <= '0;
    else if (wr) code_q <= data;
  end

  always_comb vout = real'(code_q) * VREF / real'(2 ** DW);

endmodule
