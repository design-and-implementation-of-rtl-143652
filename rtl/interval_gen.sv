// interval_gen: time-interval test giving negative-exponential pulse spacing.
//
// A counter makes a test strobe every TEST_DIV clocks. At each test the
// uniform 16-bit word rnd is compared with the threshold Y (y_thr): if
// rnd < Y, z is 1 for one clock. A test succeeds with probability
// p = Y / 2^16 independently of the others, so the number of tests between
// successive events is geometric, P(x) = (1-p)^(x-1) p, the discrete form of
// a negative exponential. With Y = 2000 p = 0.0305 per test; at one test per
// 0.1 us that is a mean interval of 3.3 us.
// Timing: z is registered; it rises the clock after the test strobe.
//
// Following the published generator: the comparison rule and Y = 2000; a test
// every 0.1 us matches the published interval histogram. Chosen here: the
// 50 MHz clock and thus TEST_DIV = 5.
module interval_gen
  import siggen_pkg::*;
#(
  parameter int unsigned TEST_DIV = 5
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [RND_W-1:0] rnd,
  input  logic [RND_W-1:0] y_thr,
  output logic             tick,   // test strobe (for observation)
  output logic             z
);
  localparam int unsigned DW = (TEST_DIV > 1) ? $clog2(TEST_DIV) : 1;

  logic [DW-1:0] div_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      div_q <= '0;
    end else if (div_q == DW'(TEST_DIV - 1)) begin
      div_q <= '0;
    end else begin
      div_q <= div_q + 1'b1;
    end
  end

  assign tick = (div_q == DW'(TEST_DIV - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) z <= 1'b0;
    else        z <= tick && (rnd < y_thr);
  end

endmodule
