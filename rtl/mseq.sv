// mseq: M-sequence (maximal-length LFSR) uniform random-word generator.
//
// A W-bit Galois LFSR with feedback mask TAPS runs through all 2^W - 1 nonzero
// states. Each enabled clock it is advanced STEPS single shifts at once (by an
// unrolled loop), so that with STEPS = W consecutive output words share no
// bits. The output rnd is the register itself, uniformly distributed over
// 1 .. 2^W - 1. Reset (rst_n low) loads SEED; different seeds give different
// phases of the same sequence.
//
// Following the published generator: the use of an M sequence as the uniform
// source and its 16-bit width. Chosen here: the polynomial
// x^16 + x^14 + x^13 + x^11 + 1 (mask 0xB400), the multi-step advance and the
// seeds.
module mseq #(
  parameter int unsigned W     = 16,
  parameter logic [W-1:0] TAPS = 16'hB400,
  parameter int unsigned STEPS = 16,
  parameter logic [W-1:0] SEED = 16'hACE1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         en,
  output logic [W-1:0] rnd
);

  logic [W-1:0] state_q, state_d;

  always_comb begin
    state_d = state_q;
    for (int unsigned i = 0; i < STEPS; i++) begin
      if (state_d[0]) state_d = (state_d >> 1) ^ TAPS;
      else            state_d = state_d >> 1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  state_q <= SEED;
    else if (en) state_q <= state_d;
  end

  assign rnd = state_q;

  // A maximal-length LFSR must never reach the all-zero lock-up state.
  assert property (@(posedge clk) disable iff (!rst_n) state_q != '0);

endmodule
