// ste_lut: straight-through estimator of the spike function's derivative.
//
// The learning rule needs, for each hidden neuron, a surrogate of
// d(spike)/d(u). It is a programmable piecewise-constant function of the
// membrane potential with five segments and 5-bit signed values, as in the
// processor description. How segments are delimited is this implementation's
// choice: four signed breakpoints bp[0] <= bp[1] <= bp[2] <= bp[3]; u falls in
// segment s, the first with u < bp[s], or in segment 4 when u >= bp[3]. The
// output is val[s]. Combinational.
module ste_lut
  import reckon_pkg::*;
(
  input  logic signed [U_W-1:0]  u,
  input  logic [3:0][U_W-1:0]    bp,
  input  logic [4:0][STE_W-1:0]  val,
  output logic signed [STE_W-1:0] ste
);
  always_comb begin
    ste = val[4];
    for (int s = 3; s >= 0; s--)
      if (u < $signed(bp[s])) ste = val[s];
  end
endmodule
