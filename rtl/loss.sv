// loss: targets and output errors for supervised learning.
//
// Holds one 16-bit signed target per output neuron, written one at a time
// (`tgt_we`, `tgt_idx`, `tgt_val`), and computes the errors
// err[k] = y*[k] - y[k] saturated to 16 bits, with zero error for outputs at
// or beyond n_out. These errors are the learning-signal source of the
// weight-update block: output weights change with err[k] times the output
// eligibility trace, hidden weights with the back-projected sum over k of
// w_out[k][j] * err[k]. For classification the target of the correct class
// is set high and the others low; for regression each target is a value.
// The error form y* - y follows the processor description; the target
// write port is this implementation's choice. Errors are combinational.
module loss
  import reckon_pkg::*;
#(
  parameter int unsigned NO = N_OUT
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          tgt_we,
  input  logic [$clog2(NO)-1:0]         tgt_idx,
  input  logic signed [Y_W-1:0]         tgt_val,
  input  logic [4:0]                    n_out,
  input  logic signed [NO-1:0][Y_W-1:0] y,
  output logic signed [NO-1:0][Y_W-1:0] err
);
  logic signed [NO-1:0][Y_W-1:0] tgt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      tgt <= '0;
    else if (tgt_we) tgt[tgt_idx] <= tgt_val;
  end

  always_comb begin
    for (int k = 0; k < NO; k++) begin
      if (k < int'(n_out))
        err[k] = Y_W'(sat_s(48'($signed(tgt[k])) - 48'($signed(y[k])), Y_W));
      else
        err[k] = '0;
    end
  end
endmodule
