// tb_lif_neuron: random operands against a reference written with plain
// integer arithmetic. Integration: exact sum with saturation. Firing:
// spike iff u - theta > 0, reset by subtraction. Decay: the result must be
// floor(v * f / 2^m) or that plus one, and equal to the floor plus
// (fraction > random low bits). Also checks the mean of repeated stochastic
// decays of a small value against the exact product (unbiased rounding).
module tb_lif_neuron;
  import reckon_pkg::*;
  neuron_t st_i, st_int_o, st_dec_o;
  logic signed [15:0] theta;
  logic [11:0] alpha;
  logic [7:0] kappa;
  logic add_inp, add_rec, add_noise, inc_x, inc_z, spike_o;
  logic signed [7:0] w_inp, w_rec;
  logic [3:0] sh_inp, sh_rec, noise_sh, inc_inp, inc_rec, inc_out;
  logic [15:0] rnd;
  int checks = 0, failures = 0;
  lif_neuron dut (.*);
  initial begin
    #100000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  function automatic longint sat(longint v, int w);
    longint hi, lo; hi = (64'sd1 << (w-1)) - 1; lo = -(64'sd1 << (w-1));
    return v > hi ? hi : (v < lo ? lo : v);
  endfunction
  function automatic longint usat(longint v, int w);
    longint hi; hi = (64'sd1 << w) - 1; return v > hi ? hi : v;
  endfunction
  function automatic longint fdiv(longint v, int m);   // floor(v / 2^m)
    longint q; q = v / (64'sd1 << m);
    if (v < 0 && q * (64'sd1 << m) != v) q = q - 1;
    return q;
  endfunction
  task automatic chk(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin failures++; if (failures < 20) $display("%s got %0d exp %0d", what, got, exp); end
  endtask
  longint eu, d, ud, a16, prod, fl, frac;
  real acc; int nsp = 0;
  initial begin
    for (int n = 0; n < 20000; n++) begin
      st_i.u = 16'($urandom()); if (n % 3 == 0) st_i.u = 16'($urandom_range(0, 2000) - 1000);
      st_i.tr_inp = 12'($urandom()); st_i.tr_rec = 12'($urandom()); st_i.tr_out = 10'($urandom());
      theta = 16'($urandom_range(0, 3000)); alpha = 12'($urandom()); kappa = 8'($urandom());
      add_inp = 1'($urandom()); add_rec = 1'($urandom()); add_noise = 1'($urandom());
      w_inp = 8'($urandom()); w_rec = 8'($urandom());
      sh_inp = 4'($urandom_range(0, 8)); sh_rec = 4'($urandom_range(0, 8)); noise_sh = 4'($urandom_range(4, 15));
      inc_x = 1'($urandom()); inc_z = 1'($urandom());
      inc_inp = 4'($urandom_range(0, 11)); inc_rec = 4'($urandom_range(0, 11)); inc_out = 4'($urandom_range(0, 9));
      rnd = 16'($urandom());
      if (n % 40 == 0) theta = st_i.u;          // boundary: u - theta = 0 must not spike
      if (n % 40 == 1) theta = st_i.u - 16'sd1; // boundary: u - theta = 1 must spike
      #1;
      // integration
      eu = longint'(st_i.u);
      if (add_inp) eu += longint'(w_inp) * (64'sd1 << sh_inp);
      if (add_rec) eu += longint'(w_rec) * (64'sd1 << sh_rec);
      if (add_noise) eu += fdiv(longint'($signed(rnd)), noise_sh);
      chk("u_int", longint'(st_int_o.u), sat(eu, 16));
      chk("tri", st_int_o.tr_inp, inc_x ? usat(st_i.tr_inp + (1 << inc_inp), 12) : st_i.tr_inp);
      chk("trr", st_int_o.tr_rec, inc_z ? usat(st_i.tr_rec + (1 << inc_rec), 12) : st_i.tr_rec);
      chk("tro", st_int_o.tr_out, inc_z ? usat(st_i.tr_out + (1 << inc_out), 10) : st_i.tr_out);
      // firing
      d = longint'(st_i.u) - longint'(theta);
      chk("spike", spike_o, d > 0);
      nsp += spike_o;
      ud = (d > 0) ? d : longint'(st_i.u);
      a16 = longint'(alpha) * 16;
      prod = ud * a16; fl = fdiv(prod, 16); frac = prod - fl * 65536;
      chk("u_dec", longint'(st_dec_o.u), fl + ((frac > longint'(rnd)) ? 1 : 0));
      prod = longint'(st_i.tr_inp) * a16;
      chk("tri_dec_lo", (st_dec_o.tr_inp >= fdiv(prod, 16)) && (st_dec_o.tr_inp <= fdiv(prod, 16) + 1), 1);
      prod = longint'(st_i.tr_rec) * a16;
      chk("trr_dec_lo", (st_dec_o.tr_rec >= fdiv(prod, 16)) && (st_dec_o.tr_rec <= fdiv(prod, 16) + 1), 1);
      prod = longint'(st_i.tr_out) * kappa;
      chk("tro_dec_lo", (st_dec_o.tr_out >= fdiv(prod, 8)) && (st_dec_o.tr_out <= fdiv(prod, 8) + 1), 1);
    end
    checks++; if (nsp == 0) failures++;
    // unbiased stochastic rounding: trace 3 with alpha 0.5 -> mean 1.5
    acc = 0;
    st_i = '0; st_i.tr_inp = 12'd3; st_i.u = 16'sd3; theta = 16'sd100; alpha = 12'd2048; kappa = 8'd128;
    add_inp = 0; add_rec = 0; add_noise = 0; inc_x = 0; inc_z = 0;
    for (int n = 0; n < 4000; n++) begin
      rnd = 16'($urandom()); #1; acc += real'(st_dec_o.tr_inp);
    end
    acc = acc / 4000.0;
    checks++; if (acc < 1.4 || acc > 1.6) begin failures++; $display("mean %f", acc); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
