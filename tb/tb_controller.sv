// tb_controller: runs timesteps of the forward pass on memories filled with
// random weights and neuron states and checks, neuron by neuron, against a
// reference computed here: integration of the weights of the active inputs
// and recurrent neurons (ascending index, saturating), trace increments,
// the spike condition u - theta > 0 with reset by subtraction, and decays
// within one LSB of the exact product. Also checks the cycle count
// N(1+S) + N + 5 (S = active entries of x|z), the spikes written to the next
// z map, one output-layer addition per spike and one output decay per step,
// one update of the output sums after the last addition,
// the clear pass, and that a learning step starts the weight update and
// waits for it.
module tb_controller;
  import reckon_pkg::*;
  logic clk = 0, rst_n = 0, step_req = 0, sample_clr = 0, sup_valid = 0, busy;
  logic [14:0] timestep;
  cfg_t cfg;
  logic [255:0] x_cur, z_cur, x_nxt, z_nxt;
  logic map_swap, map_clr, z_set, x_set = 0;
  logic [7:0] z_set_idx, x_idx = 0;
  logic nr_re, nr_we, wh_re, wo_re, li_clr, li_int, li_dec, li_acc, wu_start, wu_done = 0, ev_syn, ev_spk;
  logic [6:0] nr_raddr, nr_waddr;
  logic [127:0] nr_rdata, wi_rdata, wr_rdata, wo_rdata;
  nword_t nr_wdata;
  logic [11:0] wh_raddr;
  logic [8:0] wo_raddr;
  int checks = 0, failures = 0;

  controller dut (.clk, .rst_n, .cfg, .step_req, .sample_clr, .sup_valid, .busy, .timestep,
    .x_cur, .z_cur, .map_swap, .map_clr, .z_set, .z_set_idx,
    .nr_re, .nr_raddr, .nr_rdata(nword_t'(nr_rdata)), .nr_we, .nr_waddr, .nr_wdata,
    .wh_re, .wh_raddr, .wi_rdata, .wr_rdata, .wo_re, .wo_raddr,
    .li_clr, .li_int, .li_dec, .li_acc, .wu_start, .wu_done, .ev_syn, .ev_spk);
  sparsity_map xm (.clk, .rst_n, .set_en(x_set), .set_idx(x_idx), .swap(map_swap), .clear(map_clr), .cur(x_cur), .nxt(x_nxt));
  sparsity_map zm (.clk, .rst_n, .set_en(z_set), .set_idx(z_set_idx), .swap(map_swap), .clear(map_clr), .cur(z_cur), .nxt(z_nxt));
  sram_1r1w #(.DEPTH(128))  m_nr (.clk, .re(nr_re), .raddr(nr_raddr), .rdata(nr_rdata), .we(nr_we), .waddr(nr_waddr), .wbe('1), .wdata(nr_wdata));
  sram_1r1w #(.DEPTH(4096)) m_wi (.clk, .re(wh_re), .raddr(wh_raddr), .rdata(wi_rdata), .we(1'b0), .waddr('0), .wbe('0), .wdata('0));
  sram_1r1w #(.DEPTH(4096)) m_wr (.clk, .re(wh_re), .raddr(wh_raddr), .rdata(wr_rdata), .we(1'b0), .waddr('0), .wbe('0), .wdata('0));
  sram_1r1w #(.DEPTH(512))  m_wo (.clk, .re(wo_re), .raddr(wo_raddr), .rdata(wo_rdata), .we(1'b0), .waddr('0), .wbe('0), .wdata('0));
  always #5 clk = ~clk;
  initial begin
    #50000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int nint, ndec, nacc, nlate, nwo_bad, nspk_total;
  logic [255:0] wo_seen;
  always @(posedge clk) if (rst_n) begin
    nint += int'(li_int); ndec += int'(li_dec);
    if (li_int && nacc > 0) nlate++;   // an output add after the sums were taken
    nacc += int'(li_acc);
    if (wo_re) wo_seen[wo_raddr[7:0]] = 1'b1;
  end

  function automatic longint fdiv(longint v, int s);
    longint q; q = v / (64'sd1 << s); if (v < 0 && q * (64'sd1 << s) != v) q--; return q;
  endfunction
  function automatic longint sat16(longint v); return v > 32767 ? 32767 : (v < -32768 ? -32768 : v); endfunction
  function automatic longint usat(longint v, int w); return v > (64'sd1 << w) - 1 ? (64'sd1 << w) - 1 : v; endfunction
  function automatic neuron_t getn(int j); nword_t w; w = m_nr.mem[j/2]; return (j % 2) ? w.n1 : w.n0; endfunction
  function automatic int wgt_i(int j, int i); return int'($signed(m_wi.mem[i*16 + j/16][(j%16)*8 +: 8])); endfunction
  function automatic int wgt_r(int j, int i); return int'($signed(m_wr.mem[i*16 + j/16][(j%16)*8 +: 8])); endfunction
  task automatic chk(string s, longint got, longint exp);
    checks++; if (got != exp) begin failures++; if (failures < 15) $display("%s got %0d exp %0d", s, got, exp); end
  endtask
  task automatic chk_dec(string s, longint got, longint v, longint f, int m);
    longint fl; fl = fdiv(v * f, m);
    checks++; if (!(got == fl || got == fl + 1)) begin failures++; if (failures < 15) $display("%s got %0d exp ~%0d", s, got, fl); end
  endtask

  task automatic step_and_check(int n, int nin);
    neuron_t pre [256];
    logic [255:0] xs, zs, spk;
    int s, cyc, nsp;
    // present inputs for the coming step
    for (int e = 0; e < nin; e++) begin
      @(negedge clk); x_set = 1; x_idx = 8'($urandom());
    end
    @(negedge clk); x_set = 0;
    xs = x_nxt; zs = z_nxt;
    for (int j = 0; j < n; j++) pre[j] = getn(j);
    s = $countones(xs | zs);
    nint = 0; ndec = 0; nacc = 0; nlate = 0; wo_seen = '0;
    step_req = 1; @(negedge clk); step_req = 0; cyc = 1;
    while (busy && cyc < 200000) begin @(negedge clk); cyc++; end
    chk("cycles", cyc, n * (1 + s) + n + 5);
    spk = '0; nsp = 0;
    for (int j = 0; j < n; j++) begin
      longint u, d, ud, a16, ti, tr, to;
      nword_t w; neuron_t post;
      w = m_nr.mem[j/2]; post = getn(j);
      u = longint'(pre[j].u);
      for (int i = 0; i < 256; i++) if (xs[i] || zs[i]) begin
        longint add; add = 0;
        if (xs[i]) add += longint'(wgt_i(j, i)) * (64'sd1 << cfg.sh_inp);
        if (zs[i]) add += longint'(wgt_r(j, i)) * (64'sd1 << cfg.sh_rec);
        u = sat16(u + add);
      end
      ti = xs[j] ? usat(pre[j].tr_inp + (1 << cfg.inc_inp), 12) : pre[j].tr_inp;
      tr = zs[j] ? usat(pre[j].tr_rec + (1 << cfg.inc_rec), 12) : pre[j].tr_rec;
      to = zs[j] ? usat(pre[j].tr_out + (1 << cfg.inc_out), 10) : pre[j].tr_out;
      d = u - longint'(w.theta);
      spk[j] = (d > 0); nsp += int'(d > 0);
      ud = (d > 0) ? d : u;
      a16 = longint'(w.alpha) * 16;
      chk_dec("u", longint'(post.u), ud, a16, 16);
      chk_dec("tr_inp", post.tr_inp, ti, a16, 16);
      chk_dec("tr_rec", post.tr_rec, tr, a16, 16);
      chk_dec("tr_out", post.tr_out, to, cfg.kappa, 8);
    end
    chk("z map", z_nxt, spk);
    chk("out adds", nint, nsp);
    chk("out rows", wo_seen, spk);
    chk("out decay", ndec, 1);
    chk("output sums taken once", nacc, 1);
    chk("no output add after the sums", nlate, 0);
    nspk_total += nsp;
  endtask

  initial begin
    int n;
    cfg = '0; cfg.sh_inp = 4; cfg.sh_rec = 3; cfg.inc_inp = 5; cfg.inc_rec = 6; cfg.inc_out = 4; cfg.kappa = 8'd230;
    nspk_total = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 4; t++) begin
      n = (t == 0) ? 16 : (t == 1 ? 13 : (t == 2 ? 40 : 7));
      cfg.n_neur = 9'(n);
      for (int w = 0; w < 128; w++) begin
        nword_t nw;
        nw.theta = 16'($urandom_range(200, 2500)); nw.alpha = 12'($urandom_range(3000, 4095));
        nw.n0.u = 16'($urandom_range(0, 2000) - 1000); nw.n1.u = 16'($urandom_range(0, 2000) - 1000);
        nw.n0.tr_inp = 12'($urandom()); nw.n0.tr_rec = 12'($urandom()); nw.n0.tr_out = 10'($urandom());
        nw.n1.tr_inp = 12'($urandom()); nw.n1.tr_rec = 12'($urandom()); nw.n1.tr_out = 10'($urandom());
        m_nr.mem[w] = nw;
      end
      for (int a = 0; a < 4096; a++) begin
        m_wi.mem[a] = {$urandom(), $urandom(), $urandom(), $urandom()};
        m_wr.mem[a] = {$urandom(), $urandom(), $urandom(), $urandom()};
      end
      for (int k = 0; k < 6; k++) step_and_check(n, (k == 0) ? 0 : $urandom_range(1, 12));
    end
    checks++; if (nspk_total == 0) failures++;
    // clear pass
    n = 40; cfg.n_neur = 9'(n);
    begin
      int th [64]; int al [64];
      for (int w = 0; w < 20; w++) begin nword_t nw; nw = m_nr.mem[w]; th[w] = int'(nw.theta); al[w] = int'(nw.alpha); end
      @(negedge clk); sample_clr = 1; @(negedge clk); sample_clr = 0;
      while (busy) @(negedge clk);
      for (int w = 0; w < 20; w++) begin
        nword_t nw; nw = m_nr.mem[w];
        chk("clr state", {nw.n0, nw.n1}, 0); chk("clr theta", int'(nw.theta), th[w]); chk("clr alpha", int'(nw.alpha), al[w]);
      end
      chk("clr maps", {x_cur, z_cur, x_nxt, z_nxt}, 0);
      chk("clr timestep", timestep, 0);
    end
    // learning hand-off
    cfg.learn_en = 1; sup_valid = 1;
    begin
      int cyc, sawstart;
      sawstart = 0;
      step_req = 1; @(negedge clk); step_req = 0; cyc = 0;
      while (!wu_start && cyc < 10000) begin @(negedge clk); cyc++; end
      chk("wu start", wu_start, 1);
      repeat (50) @(negedge clk);
      chk("waits for update", busy, 1);
      wu_done = 1; @(negedge clk); wu_done = 0; @(negedge clk);
      chk("done after update", busy, 0);
      chk("timestep", timestep, 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
