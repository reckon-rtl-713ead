// tb_weight_update: runs the learning step on memories filled with small
// random weights and traces (many traces zero, so skipping happens) and
// compares every weight afterwards with a reference computed here from the
// e-prop update formulas. Learning-rate shifts are 0 so the rounding is
// exact. Checks the cycle count N(N+16)/8 (+2 for start and finish) for
// N = 32, 20 and 16, that weights of skipped synapses and of neurons at or
// beyond N stay unchanged, the numbers of applied and skipped updates, and
// that only words with at least one applied update are written.
module tb_weight_update;
  import reckon_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  cfg_t cfg;
  logic signed [15:0][15:0] err;
  logic nr_re, wo_re, wo_we, wh_re, wi_we, wr_we;
  logic [5:0] upd_n, skip_n;
  int nwr_i, nwr_r, nwr_o, ref_wr_i, ref_wr_r, ref_wr_o, ref_upd, ref_skip;
  logic [6:0] nr_raddr; logic [8:0] wo_raddr, wo_waddr; logic [11:0] wh_raddr, wh_waddr;
  logic [127:0] nr_rdata, wo_rdata, wi_rdata, wr_rdata, wo_wdata, wi_wdata, wr_wdata;
  int checks = 0, failures = 0, nskip = 0, nupd = 0;

  weight_update dut (.clk, .rst_n, .cfg, .start, .busy, .done, .err,
    .nr_re, .nr_raddr, .nr_rdata(nword_t'(nr_rdata)), .wo_re, .wo_raddr, .wo_rdata, .wo_we, .wo_waddr, .wo_wdata,
    .wh_re, .wh_raddr, .wi_rdata, .wr_rdata, .wi_we, .wr_we, .wh_waddr, .wi_wdata, .wr_wdata, .upd_n, .skip_n);
  sram_1r1w #(.DEPTH(128))  m_nr (.clk, .re(nr_re), .raddr(nr_raddr), .rdata(nr_rdata), .we(1'b0), .waddr('0), .wbe('0), .wdata('0));
  sram_1r1w #(.DEPTH(512))  m_wo (.clk, .re(wo_re), .raddr(wo_raddr), .rdata(wo_rdata), .we(wo_we), .waddr(wo_waddr), .wbe('1), .wdata(wo_wdata));
  sram_1r1w #(.DEPTH(4096)) m_wi (.clk, .re(wh_re), .raddr(wh_raddr), .rdata(wi_rdata), .we(wi_we), .waddr(wh_waddr), .wbe('1), .wdata(wi_wdata));
  sram_1r1w #(.DEPTH(4096)) m_wr (.clk, .re(wh_re), .raddr(wh_raddr), .rdata(wr_rdata), .we(wr_we), .waddr(wh_waddr), .wbe('1), .wdata(wr_wdata));
  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n) begin
    nskip += int'(skip_n); nupd += int'(upd_n);
    nwr_i += int'(wi_we); nwr_r += int'(wr_we); nwr_o += int'(wo_we);
  end
  initial begin
    #50000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // reference state
  int u [256]; int t_in [256]; int t_rc [256]; int t_ot [256];
  int wo [16][256]; int wi [256][256]; int wr [256][256];   // wi[j][i]: from i to j
  int e [16];

  function automatic int clamp8(longint v); return v > 127 ? 127 : (v < -128 ? -128 : int'(v)); endfunction
  function automatic int sx5(int v); return (v >= 16) ? v - 32 : v; endfunction
  function automatic int ste_ref(int uu);
    for (int s = 0; s < 4; s++) if (uu < int'($signed(cfg.ste_bp[s]))) return sx5(int'(cfg.ste_val[s]));
    return sx5(int'(cfg.ste_val[4]));
  endfunction

  task automatic load(int n);
    for (int w = 0; w < 128; w++) begin
      nword_t nw;
      nw = '0; nw.theta = 16'sd100; nw.alpha = 12'd4000;
      for (int h = 0; h < 2; h++) begin
        int j; neuron_t s; j = 2*w + h;
        u[j] = $urandom_range(0, 1200) - 600;
        t_in[j] = ($urandom_range(0, 2) == 0) ? 0 : $urandom_range(1, 3);
        t_rc[j] = ($urandom_range(0, 2) == 0) ? 0 : $urandom_range(1, 5);
        t_ot[j] = ($urandom_range(0, 1) == 0) ? 0 : $urandom_range(1, 3);
        s.u = 16'(u[j]); s.tr_inp = 12'(t_in[j]); s.tr_rec = 12'(t_rc[j]); s.tr_out = 10'(t_ot[j]);
        if (h == 0) nw.n0 = s; else nw.n1 = s;
      end
      m_nr.mem[w] = nw;
    end
    for (int j = 0; j < 256; j++) begin
      logic [127:0] word;
      for (int k = 0; k < 16; k++) begin wo[k][j] = $urandom_range(0, 16) - 8; word[k*8 +: 8] = 8'(wo[k][j]); end
      m_wo.mem[j] = word;
    end
    for (int i = 0; i < 256; i++)
      for (int b = 0; b < 16; b++) begin
        logic [127:0] a, r;
        for (int q = 0; q < 16; q++) begin
          wi[b*16+q][i] = $urandom_range(0, 200) - 100; wr[b*16+q][i] = $urandom_range(0, 200) - 100;
          a[q*8 +: 8] = 8'(wi[b*16+q][i]); r[q*8 +: 8] = 8'(wr[b*16+q][i]);
        end
        m_wi.mem[i*16+b] = a; m_wr.mem[i*16+b] = r;
      end
    for (int k = 0; k < 16; k++) begin e[k] = $urandom_range(0, 6) - 3; err[k] = 16'(e[k]); end
  endtask

  task automatic reference(int n);
    int nb; nb = (n + 15) / 16;
    for (int b = 0; b < nb; b++) begin
      int ls [16]; int st [16]; int rg [16];
      for (int q = 0; q < 16; q++) begin
        int j; longint sum; j = b*16 + q;
        ls[q] = 0; st[q] = 0; rg[q] = 0;
        if (j < n) begin
          sum = 0;
          for (int k = 0; k < 16; k++) sum += wo[k][j] * e[k];
          ls[q] = int'(sum >>> 7);
          st[q] = ste_ref(u[j]);
          rg[q] = (cfg.reg_en && t_rc[j] > int'(cfg.reg_thr)) ? -((t_rc[j] - int'(cfg.reg_thr)) << cfg.reg_sh) : 0;
          if (t_ot[j] != 0) ref_wr_o++;
          if (t_ot[j] != 0) for (int k = 0; k < 16; k++) wo[k][j] = clamp8(longint'(wo[k][j]) + e[k] * t_ot[j]);
        end
      end
      for (int i = 0; i < n; i++) begin
        int any_i, any_r; any_i = 0; any_r = 0;
        for (int q = 0; q < 16; q++) if (b*16 + q < n) begin
          if (st[q] != 0 && t_in[i] != 0) begin any_i = 1; ref_upd++; end else ref_skip++;
          if (st[q] != 0 && t_rc[i] != 0) begin any_r = 1; ref_upd++; end else ref_skip++;
        end
        ref_wr_i += any_i; ref_wr_r += any_r;
      end
      for (int i = 0; i < n; i++)
        for (int q = 0; q < 16; q++) begin
          int j; j = b*16 + q;
          if (j < n && st[q] != 0) begin
            if (t_in[i] != 0) wi[j][i] = clamp8(longint'(wi[j][i]) + t_in[i] * st[q] * ls[q] + rg[q]);
            if (t_rc[i] != 0) wr[j][i] = clamp8(longint'(wr[j][i]) + t_rc[i] * st[q] * ls[q] + rg[q]);
          end
        end
    end
  endtask

  task automatic chk_eq(string s, int got, int exp);
    checks++; if (got != exp) begin failures++; $display("%s %0d exp %0d", s, got, exp); end
  endtask

  task automatic compare();
    for (int j = 0; j < 256; j++) for (int k = 0; k < 16; k++) begin
      checks++; if (int'($signed(m_wo.mem[j][k*8 +: 8])) != wo[k][j]) begin failures++; if (failures < 10) $display("wo k%0d j%0d %0d exp %0d", k, j, $signed(m_wo.mem[j][k*8 +: 8]), wo[k][j]); end
    end
    for (int i = 0; i < 256; i++) for (int j = 0; j < 256; j++) begin
      checks++; if (int'($signed(m_wi.mem[i*16 + j/16][(j%16)*8 +: 8])) != wi[j][i]) begin failures++; if (failures < 10) $display("wi j%0d i%0d", j, i); end
      checks++; if (int'($signed(m_wr.mem[i*16 + j/16][(j%16)*8 +: 8])) != wr[j][i]) begin failures++; if (failures < 10) $display("wr j%0d i%0d", j, i); end
    end
  endtask

  initial begin
    int ns [3] = '{32, 20, 16};
    nwr_i = 0; nwr_r = 0; nwr_o = 0; ref_wr_i = 0; ref_wr_r = 0; ref_wr_o = 0; nupd = 0; nskip = 0; ref_upd = 0; ref_skip = 0;
    cfg = '0; cfg.lr_out = 0; cfg.lr_hid = 0; cfg.reg_en = 1; cfg.reg_thr = 12'd3; cfg.reg_sh = 4'd0;
    cfg.ste_bp[0] = 16'hFF00; cfg.ste_bp[1] = 16'hFFC0; cfg.ste_bp[2] = 16'h0040; cfg.ste_bp[3] = 16'h0100;
    cfg.ste_val[0] = 5'd0; cfg.ste_val[1] = 5'd1; cfg.ste_val[2] = 5'd2; cfg.ste_val[3] = 5'h1F; cfg.ste_val[4] = 5'd0;
    repeat (2) @(negedge clk); rst_n = 1;
    foreach (ns[t]) begin
      int cyc;
      cfg.n_neur = 9'(ns[t]);
      load(ns[t]);
      reference(ns[t]);
      @(negedge clk); start = 1; @(negedge clk); start = 0; cyc = 1;
      while (!done && cyc < 100000) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != ((ns[t] + 15) / 16) * (32 + 2 * ns[t]) + 2) begin failures++; $display("N=%0d cycles %0d", ns[t], cyc); end
      else $display("N=%0d: %0d cycles (N(N+16)/8 = %0d)", ns[t], cyc, ns[t] * (ns[t] + 16) / 8);
      @(negedge clk);
      compare();
      chk_eq("W_inp writes", nwr_i, ref_wr_i); chk_eq("W_rec writes", nwr_r, ref_wr_r); chk_eq("W_out writes", nwr_o, ref_wr_o);
      chk_eq("updates applied", nupd, ref_upd); chk_eq("updates skipped", nskip, ref_skip);
      $display("N=%0d: update rate %0d of %0d", ns[t], nupd, nupd + nskip);
      nwr_i = 0; nwr_r = 0; nwr_o = 0; ref_wr_i = 0; ref_wr_r = 0; ref_wr_o = 0; nupd = 0; nskip = 0; ref_upd = 0; ref_skip = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
