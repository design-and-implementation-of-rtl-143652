// output_adder: behavioural model of the summing amplifier that adds the NaI
// and CsI channels into the generator output. Not synthesizable logic.
//
// vout = a + b, limited to the range 0 .. V_MAX. The sum of the two channels
// is the published phoswich pulse (NaI part plus CsI part); the unity gain
// and the hard limit at the published 3.2 V maximum output are this model's.
module output_adder #(
  parameter real V_MAX = 3.2
) (
  input  real a,
  input  real b,
  output real vout
);

  always_comb begin
    real s;
    s = a + b;
    if (s > V_MAX)    vout = V_MAX;
    else if (s < 0.0) vout = 0.0;
    else              vout = s;
  end

endmodule
