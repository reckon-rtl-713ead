// li_output: the leaky-integrator output layer (up to 16 neurons).
//
// The output values y[0..15] live in a 16 x 16-bit register file. They are
// updated like the hidden neurons but without spiking or reset:
//  * `int_en`: a hidden neuron j spiked; `w_word` is its 128-bit output-weight
//    word, byte k being the weight to output k. Each y[k] gains
//    w_out[k] << sh_out, saturated to 16 bits signed, all 16 in parallel.
//  * `dec_en`: y[k] is multiplied by kappa/256 with stochastic rounding
//    (round up when the fraction exceeds a pseudo-random number).
//  * `clr`: all y to zero.
// The readout `y_act` is y, or, with `sig_en`, the hard sigmoid
// clamp(y + 128, 0, 256), where 256 stands for 1.0.
//  * `acc_en` (once per timestep, in the cycle of the step's last update):
//    each y_act, as it will be after this cycle's update, is added to a
//    32-bit saturating sum `y_sum[k]`; `clr` also clears the sums.
// `decision` is, in classification mode, the index of the largest sum among
// the first n_out outputs (lowest index on ties), i.e. of the highest
// average output since the sample started, so a decision can be read after
// any step. Otherwise it is y_act[out_sel].
// The 16 outputs, the 16x16-bit register file, the kappa leak, the optional
// hard sigmoid, the max()/y selection and the highest-average decision
// follow the processor description; the sigmoid's scale, the weight shift,
// the sum width and tie-breaking are this implementation's choices. Updates
// take effect at the next clock edge; readouts are combinational.
module li_output
  import reckon_pkg::*;
#(
  parameter int unsigned NO = N_OUT,
  parameter int unsigned SUM_W = 32
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          clr,
  input  logic                          int_en,
  input  logic [NO*8-1:0]               w_word,
  input  logic                          dec_en,
  input  logic                          acc_en,
  input  logic [15:0]                   rnd,
  input  cfg_t                          cfg,
  output logic signed [NO-1:0][Y_W-1:0] y,
  output logic signed [NO-1:0][Y_W-1:0] y_act,
  output logic signed [NO-1:0][SUM_W-1:0] y_sum,
  output logic [15:0]                   decision
);
  // Hard sigmoid of one output value, 256 standing for 1.0.
  function automatic logic signed [Y_W-1:0] act(input logic signed [Y_W-1:0] v, input logic sig_en);
    logic signed [31:0] t;
    t = 32'(v) + 32'sd128;
    if (!sig_en)      return v;
    else if (t < 0)   return '0;
    else if (t > 256) return Y_W'(256);
    else              return Y_W'(t);
  endfunction

  // Next value of every output.
  logic signed [NO-1:0][Y_W-1:0] y_nxt;
  always_comb begin
    for (int k = 0; k < NO; k++) begin
      logic signed [31:0] s;
      logic signed [31:0] p;
      logic [15:0]        r;
      s = '0; p = '0; r = '0;
      y_nxt[k] = y[k];
      if (clr) begin
        y_nxt[k] = '0;
      end else if (int_en) begin
        s = 32'($signed(y[k])) + (32'($signed(w_word[k*8 +: 8])) <<< cfg.sh_out);
        y_nxt[k] = Y_W'(sat_s(48'(s), Y_W));
      end else if (dec_en) begin
        r = (rnd << (k % 16)) | (rnd >> (16 - (k % 16)));
        p = 32'($signed(y[k])) * $signed({24'd0, cfg.kappa});
        y_nxt[k] = Y_W'((p >>> 8) + 32'(p[7:0] > r[7:0]));
      end
    end
  end

  // Output values and their running sums over the sample.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      y <= '0; y_sum <= '0;
    end else begin
      y <= y_nxt;
      if (clr) y_sum <= '0;
      else if (acc_en)
        for (int k = 0; k < NO; k++)
          y_sum[k] <= SUM_W'(sat_s(48'($signed(y_sum[k])) + 48'(act(y_nxt[k], cfg.sig_en)), SUM_W));
    end
  end

  always_comb
    for (int k = 0; k < NO; k++) y_act[k] = act(y[k], cfg.sig_en);

  // The largest sum is the largest average, all sums having the same count.
  logic [3:0] best;
  always_comb begin
    best = '0;
    for (int k = 1; k < NO; k++)
      if (k < int'(cfg.n_out) && $signed(y_sum[k]) > $signed(y_sum[best])) best = 4'(k);
    decision = cfg.class_mode ? {12'd0, best} : y_act[cfg.out_sel];
  end
endmodule
