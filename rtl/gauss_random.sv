// gauss_random: approximately Gaussian random numbers by the central limit
// theorem.
//
// N copies of the M-sequence generator, each started from a different seed,
// are advanced every clock; their W-bit words are added and registered. The
// sum is offered raw and centred (sum - N * 2^(W-1), signed). For N = 12 and
// W = 16 the centred sum has mean 0 and standard deviation 2^16.
// Latency: the sum of the words present at one clock appears after that edge.
//
// Following the published generator: summing N = 12 M sequences with
// different initial values. Chosen here: the seeds and the register stage.
module gauss_random
  import siggen_pkg::*;
#(
  parameter int unsigned N = N_GAUSS,
  parameter int unsigned W = RND_W,
  parameter logic [W-1:0] SEED_BASE = W'(16'h1D87)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  output logic [W+$clog2(N+1)-1:0]      sum,
  output logic signed [W+$clog2(N+1):0] centered
);
  localparam int unsigned SW = W + $clog2(N + 1);

  // Distinct nonzero seed for generator i.
  function automatic logic [W-1:0] seed_of(input int unsigned i);
    logic [W-1:0] s;
    s = SEED_BASE ^ W'(i * 32'h9E37) ^ W'(i * i * 32'h0F1B);
    if (s == '0) s = W'(i + 1);
    return s;
  endfunction

  logic [W-1:0] word [N];

  for (genvar g = 0; g < N; g++) begin : g_seq
    mseq #(.W(W), .STEPS(W), .SEED(seed_of(g))) u_seq (
      .clk, .rst_n, .en(1'b1), .rnd(word[g])
    );
  end

  logic [SW-1:0] sum_d;
  always_comb begin
    sum_d = '0;
    for (int unsigned i = 0; i < N; i++) sum_d = sum_d + SW'(word[i]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sum <= '0;
    else        sum <= sum_d;
  end

  assign centered = $signed({1'b0, sum}) - $signed((SW+1)'(N * (2 ** (W - 1))));

endmodule
