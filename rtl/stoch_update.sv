// stoch_update: stochastic application of a weight change to an 8-bit weight.
//
// A signed weight change `delta` (up to 32 bits) is divided by 2^lr_shift.
// The integer part is kept and one is added when the discarded fraction
// exceeds the low lr_shift bits of a pseudo-random number, so the expected
// change equals delta / 2^lr_shift even when it is far below one weight LSB.
// The result is added to the 8-bit signed weight with saturation. Stochastic
// updates of 8-bit weights follow the processor description; the shift as
// learning rate and the saturation are this implementation's choices.
// Combinational. lr_shift must be at most 16.
module stoch_update (
  input  logic signed [31:0] delta,
  input  logic [4:0]         lr_shift,
  input  logic [15:0]        rnd,
  input  logic signed [7:0]  w,
  output logic signed [7:0]  w_new
);
  logic signed [31:0] q;
  logic [31:0]        mask, frac;
  logic signed [31:0] s;
  always_comb begin
    mask  = (32'd1 << lr_shift) - 32'd1;
    q     = delta >>> lr_shift;
    frac  = 32'(delta) & mask;
    q     = q + 32'(frac > (32'(rnd) & mask));
    s     = 32'(w) + q;
    if (s > 127)       w_new = 8'sd127;
    else if (s < -128) w_new = -8'sd128;
    else               w_new = 8'(s);
  end
endmodule
