// rejection_sampler: draws amplitudes distributed like the loaded spectrum.
//
// Each clock a try starts: channel A is the top CH_W bits of rnd_a and count B
// is rnd_b * b_range / 2^16, uniform over 0 .. b_range-1 (b_range up to
// 2^16, set to the spectrum's peak count). A is read from the spectrum RAM;
// one clock later the
// count C = spectrum[A] is back and A is accepted if B < C. The probability of
// accepting channel A is proportional to its count, so accepted channels follow
// the spectrum's shape as long as b_range is at least the peak count; the
// acceptance rate is the mean count over b_range. An accepted channel is held in a one-entry output register
// (valid/ready); accepted channels arriving while it is full are discarded,
// which leaves the distribution unchanged because tries are independent.
// Latency: two clocks from a random pair to a held sample.
//
// Following the published generator: the rejection rule and the two
// uncorrelated random series for channel and count. Chosen here: the pipeline,
// the one-entry buffer, the scaling of B by multiplication and the load port.
module rejection_sampler
  import siggen_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic [RND_W-1:0] rnd_a,
  input  logic [RND_W-1:0] rnd_b,
  input  logic [CNT_W:0]   b_range,
  // spectrum load port
  input  logic             ram_we,
  input  logic [CH_W-1:0]  ram_waddr,
  input  logic [CNT_W-1:0] ram_wdata,
  // accepted sample
  output logic             valid,
  input  logic             ready,
  output logic [CH_W-1:0]  channel,
  // one-clock strobes for statistics
  output logic             accept
);

  logic [CH_W-1:0]  a_s0, a_q;
  logic [CNT_W:0]   b_q;
  logic [RND_W+CNT_W:0] b_prod;
  logic             try_q;
  logic [CNT_W-1:0] c_count;

  assign a_s0 = rnd_a[RND_W-1 -: CH_W];

  spectrum_ram #(.AW(CH_W), .DW(CNT_W)) u_ram (
    .clk, .we(ram_we), .waddr(ram_waddr), .wdata(ram_wdata),
    .raddr(a_s0), .rdata(c_count)
  );

  assign b_prod = (RND_W+CNT_W+1)'(rnd_b) * (RND_W+CNT_W+1)'(b_range);
  assign accept = try_q && (b_q < (CNT_W+1)'(c_count));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_q     <= '0;
      b_q     <= '0;
      try_q   <= 1'b0;
      valid   <= 1'b0;
      channel <= '0;
    end else begin
      a_q   <= a_s0;
      b_q   <= b_prod[RND_W +: CNT_W+1];
      try_q <= 1'b1;
      if (accept && (!valid || ready)) begin
        valid   <= 1'b1;
        channel <= a_q;
      end else if (ready) begin
        valid   <= 1'b0;
      end
    end
  end

endmodule
