// shaping_channel: behavioural model of one analog pulse-shaping channel
// (switch1, CR differentiator, unity buffer, R0C0 integrator, switch2).
// Not synthesizable logic: real-valued, discrete-time model of a circuit.
//
// A square wave of height U0 at the input gives, after the CR high-pass,
// U(t) = U0 exp(-t/RC); the buffered R0C0 low-pass turns it into
//   V(t) = U0 RC/(RC - R0C0) (exp(-t/RC) - exp(-t/R0C0)),
// a fast rise and a slow decay like a scintillator pulse. RC plays the
// scintillator's decay constant (230 ns NaI, 630 ns CsI) and R0C0 = 300 ns is
// the forming time. The falling edge of the square wave gives the same pulse
// negated; switch2 is to be open then.
// Model: each clock (period TS_NS) is divided into SUBSTEPS steps; each step
// applies the exact exponential update of both RC sections for an input held
// constant over the step. switch1 open grounds the shaper input; switch2 open
// grounds the output.
//
// The circuit and time constants follow the published design; the time step
// and the idealised switches are this model's.
module shaping_channel #(
  parameter real         RC_NS    = 230.0,
  parameter real         R0C0_NS  = 300.0,
  parameter real         TS_NS    = 20.0,
  parameter int unsigned SUBSTEPS = 20
) (
  input  logic clk,
  input  logic rst_n,
  input  logic sw1,
  input  logic sw2,
  input  real  vin,
  output real  vout
);

  real x_prev, u, v;   // shaper input, CR output, R0C0 output (volts)

  always_ff @(posedge clk or negedge rst_n) begin
    real x, a, b, uu, vv;
    if (!rst_n) begin
      x_prev <= 0.0;
      u      <= 0.0;
      v      <= 0.0;
    end else begin
      x  = sw1 ? vin : 0.0;
      a  = $exp(-(TS_NS / real'(SUBSTEPS)) / RC_NS);
      b  = $exp(-(TS_NS / real'(SUBSTEPS)) / R0C0_NS);
      // An input step passes straight through C: the CR output jumps with it.
      uu = u + (x - x_prev);
      vv = v;
      for (int unsigned i = 0; i < SUBSTEPS; i++) begin
        // exact update of dv/dt = (u - v)/R0C0 with u = uu*exp(-t/RC)
        vv = vv * b + uu * (RC_NS / (RC_NS - R0C0_NS)) * (a - b);
        uu = uu * a;
      end
      x_prev <= x;
      u      <= uu;
      v      <= vv;
    end
  end

  always_comb vout = sw2 ? v : 0.0;

endmodule
