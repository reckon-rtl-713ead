// first_set: find the lowest set bit of a vector at or above a start index.
//
// Used to walk the non-zero entries of the activity sparsity maps, so that
// the forward pass spends one cycle per active input or recurrent neuron and
// none on silent ones. Purely combinational: `found` is high when a set bit
// exists at an index >= `start`, and `idx` is the lowest such index.
module first_set #(
  parameter int unsigned N = 256,
  localparam int unsigned AW = $clog2(N)
) (
  input  logic [N-1:0]  vec,
  input  logic [AW:0]   start,   // one bit wider so that N means "none left"
  output logic          found,
  output logic [AW-1:0] idx
);
  always_comb begin
    found = 1'b0;
    idx   = '0;
    for (int i = N-1; i >= 0; i--) begin
      if (vec[i] && (i >= int'(start))) begin
        found = 1'b1;
        idx   = AW'(i);
      end
    end
  end
endmodule
