// lif_neuron: datapath of one leaky integrate-and-fire neuron and its traces.
//
// Purely combinational; the controller holds the state in registers and
// memory and calls this logic once per cycle. Two functions are computed side
// by side from the same state `st_i`:
//
//  * Integration (`st_int_o`): u + (w_inp << sh_inp, if add_inp)
//    + (w_rec << sh_rec, if add_rec) + (PRNG noise >>> noise_sh, if
//    add_noise), saturated to 16 bits signed. In the same operation each
//    eligibility trace gains 1 << inc_* when its activity flag is set
//    (tr_inp: input channel j was active; tr_rec and tr_out: neuron j spiked in
//    the previous step), saturating at the trace's maximum.
//  * Firing and decay (`st_dec_o`, `spike_o`): if u - theta > 0 the neuron
//    spikes and u becomes u - theta (reset by subtraction). Then u, tr_inp and
//    tr_rec are multiplied by alpha and tr_out by kappa. The product keeps its
//    integer part and is rounded up when its fractional part exceeds a
//    pseudo-random number (stochastic rounding), so that small values still
//    decay on average instead of sticking.
//
// The widths (16-bit u and theta, 12/12/10-bit traces, 16-bit alpha and
// 8-bit kappa multiplier inputs), the weight shift, the PRNG noise term, the
// "u - theta > 0" test and the stochastic rounding follow the processor
// description. Saturation, the noise scaling shift and the use of rotated
// copies of one random word for the four roundings are this implementation's
// choices. alpha is stored with 12 bits and used as {alpha, 4'b0000}.
module lif_neuron
  import reckon_pkg::*;
(
  input  neuron_t                 st_i,
  input  logic signed [U_W-1:0]   theta,
  input  logic [ALPHA_W-1:0]      alpha,
  input  logic [KAPPA_W-1:0]      kappa,
  // integration
  input  logic                    add_inp,
  input  logic signed [W_W-1:0]   w_inp,
  input  logic [3:0]              sh_inp,
  input  logic                    add_rec,
  input  logic signed [W_W-1:0]   w_rec,
  input  logic [3:0]              sh_rec,
  input  logic                    add_noise,
  input  logic [3:0]              noise_sh,
  input  logic                    inc_x,      // tr_inp increment enable
  input  logic                    inc_z,      // tr_rec / tr_out increment enable
  input  logic [3:0]              inc_inp,
  input  logic [3:0]              inc_rec,
  input  logic [3:0]              inc_out,
  input  logic [15:0]             rnd,
  output neuron_t                 st_int_o,
  // firing and decay
  output neuron_t                 st_dec_o,
  output logic                    spike_o
);
  // Stochastic-rounding decay of an unsigned trace: (v * f) / 2^m.
  function automatic logic [15:0] decay_u(input logic [15:0] v, input logic [15:0] f,
                                          input int m, input logic [15:0] r);
    logic [31:0] p;
    logic [15:0] frac, rm, q;
    p    = v * f;
    q    = 16'(p >> m);
    frac = 16'(p & ((32'd1 << m) - 1));
    rm   = 16'(r & 16'((32'd1 << m) - 1));
    return q + 16'(frac > rm);
  endfunction

  function automatic logic [15:0] sat_inc(input logic [15:0] v, input logic [3:0] sh, input int w);
    logic [31:0] s, mx;
    mx = (32'd1 << w) - 1;
    s  = 32'(v) + (32'd1 << sh);
    return (s > mx) ? 16'(mx) : 16'(s);
  endfunction

  // ---------------- integration ----------------
  logic signed [31:0] acc;
  always_comb begin
    acc = 32'(st_i.u);
    if (add_inp)   acc += 32'(w_inp) <<< sh_inp;
    if (add_rec)   acc += 32'(w_rec) <<< sh_rec;
    if (add_noise) acc += 32'($signed(rnd)) >>> noise_sh;
    st_int_o.u      = U_W'(sat_s(48'(acc), U_W));
    st_int_o.tr_inp = inc_x ? TRI_W'(sat_inc(16'(st_i.tr_inp), inc_inp, TRI_W)) : st_i.tr_inp;
    st_int_o.tr_rec = inc_z ? TRR_W'(sat_inc(16'(st_i.tr_rec), inc_rec, TRR_W)) : st_i.tr_rec;
    st_int_o.tr_out = inc_z ? TRO_W'(sat_inc(16'(st_i.tr_out), inc_out, TRO_W)) : st_i.tr_out;
  end

  // ---------------- firing, reset and decay ----------------
  logic signed [U_W:0]   diff;
  logic signed [U_W-1:0] u_fired;
  logic signed [33:0]    up;
  logic [15:0]           a16;
  always_comb begin
    diff    = (U_W+1)'(st_i.u) - (U_W+1)'(theta);
    spike_o = (diff > 0);
    u_fired = spike_o ? U_W'(diff) : st_i.u;
    a16     = {alpha, 4'b0000};
    up      = 34'(u_fired) * $signed({18'd0, a16});
    st_dec_o.u      = U_W'(up >>> 16) + U_W'(up[15:0] > rnd);
    st_dec_o.tr_inp = TRI_W'(decay_u(16'(st_i.tr_inp), a16, 16, {rnd[3:0], rnd[15:4]}));
    st_dec_o.tr_rec = TRR_W'(decay_u(16'(st_i.tr_rec), a16, 16, {rnd[7:0], rnd[15:8]}));
    st_dec_o.tr_out = TRO_W'(decay_u(16'(st_i.tr_out), 16'(kappa), KAPPA_W, {rnd[11:0], rnd[15:12]}));
  end
endmodule
