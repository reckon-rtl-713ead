// tb_reckon_top: end-to-end test of the processor through its pins.
//
// A 16-neuron network is configured entirely over SPI (parameters,
// thresholds and leaks, input, recurrent and output weights), read back over
// SPI, and driven with address events through the four-phase handshake.
// Checked against references computed here:
//  * the first step after a clear: spikes (u - theta > 0 on the summed input
//    weights), the outputs y (sum of output weights of the spiking neurons),
//    the decision (highest average output), and the cycle count N(1+S) + N + 5;
//  * a learning step: all output, input and recurrent weights afterwards
//    against the e-prop update formulas (learning-rate shifts 0, exact);
//  * monitoring reads of y and of its running sums over SPI.
// Then it runs further steps with noise, hard sigmoid, regression mode and
// recurrent activity, and counts how often each mechanism occurred: address
// events, skipped silent inputs, spikes with reset, output adds, learning
// steps, applied and skipped updates, sigmoid clamping, mode switch, clear.
// A mechanism that never occurred counts as a failure.
module tb_reckon_top;
  import reckon_pkg::*;
  logic clk = 0, rst_n = 0;
  logic spi_sck = 0, spi_cs_n = 1, spi_mosi = 0, spi_miso;
  logic aer_req = 0, aer_ack; logic [7:0] aer_addr = 0;
  logic step_req = 0, sample_clr = 0, busy, sup_valid = 0, tgt_we = 0;
  logic [14:0] timestep;
  logic [3:0] tgt_idx = 0; logic signed [15:0] tgt_val = 0;
  logic [15:0] decision;
  logic signed [15:0][15:0] y_out;
  logic mon_syn, mon_spk;
  logic [5:0] mon_upd, mon_skip;
  int checks = 0, failures = 0;
  int c_aer = 0, c_spk = 0, c_upd = 0, c_skip = 0, c_learn = 0, c_sparse = 0, c_sig = 0, c_mode = 0, c_clr = 0, c_outadd = 0, c_rec = 0;

  reckon_top dut (.*);
  always #5 clk = ~clk;
  initial begin
    #400000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(posedge clk) if (rst_n) begin
    c_spk += int'(mon_spk); c_upd += int'(mon_upd); c_skip += int'(mon_skip); c_outadd += int'(dut.li_int);
  end

  localparam int N = 16;
  task automatic chk(string s, longint got, longint exp);
    checks++; if (got != exp) begin failures++; if (failures < 20) $display("%s got %0d exp %0d", s, got, exp); end
  endtask

  // ---------------- pin-level drivers ----------------
  task automatic spi(input logic rw, input logic [2:0] tgt, input logic [19:0] addr, input logic [15:0] data,
                     output logic [15:0] rd);
    logic [39:0] f; f = {rw, tgt, addr, data};
    spi_cs_n = 0; repeat (4) @(negedge clk);
    for (int b = 39; b >= 0; b--) begin
      spi_mosi = f[b]; repeat (4) @(negedge clk); spi_sck = 1;
      if (b < 16) rd[b] = spi_miso;
      repeat (4) @(negedge clk); spi_sck = 0;
    end
    repeat (4) @(negedge clk); spi_cs_n = 1; repeat (6) @(negedge clk);
  endtask
  task automatic wr(input logic [2:0] tgt, input int addr, input int data);
    logic [15:0] d; spi(1'b1, tgt, 20'(addr), 16'(data), d);
  endtask
  task automatic rd(input logic [2:0] tgt, input int addr, output logic [15:0] d);
    spi(1'b0, tgt, 20'(addr), 16'd0, d);
  endtask
  task automatic aer(input int a);
    aer_addr = 8'(a); aer_req = 1;
    while (!aer_ack) @(negedge clk);
    aer_req = 0;
    while (aer_ack) @(negedge clk);
    c_aer++;
  endtask
  task automatic step(output int cyc);
    step_req = 1; @(negedge clk); step_req = 0; cyc = 1;
    while (busy && cyc < 1000000) begin @(negedge clk); cyc++; end
  endtask

  // ---------------- reference network ----------------
  int wi [N][N]; int wr_ [N][N]; int wo [16][N]; int th [N/2]; int al [N/2];
  int sh_inp = 3, sh_rec = 2, sh_out = 2;

  function automatic neuron_t getn(int j); nword_t w; w = dut.u_neur.mem[j/2]; return (j % 2) ? w.n1 : w.n0; endfunction
  function automatic int clamp8(longint v); return v > 127 ? 127 : (v < -128 ? -128 : int'(v)); endfunction
  function automatic int sx5(int v); return (v >= 16) ? v - 32 : v; endfunction

  initial begin
    logic [15:0] d;
    int cyc, s;
    logic [N-1:0] spk;
    repeat (3) @(negedge clk); rst_n = 1; repeat (3) @(negedge clk);

    // ---- configuration over SPI ----
    wr(TGT_PARAM, 0, N); wr(TGT_PARAM, 1, 16);
    wr(TGT_PARAM, 2, {4'd0, 4'(sh_out), 4'(sh_rec), 4'(sh_inp)});
    wr(TGT_PARAM, 3, 16'h0345);      // inc_out 3, inc_rec 4, inc_inp 5
    wr(TGT_PARAM, 4, 200);           // kappa
    wr(TGT_PARAM, 5, 16'b00100);     // class mode, no noise, no sigmoid, no learning
    wr(TGT_PARAM, 7, 0); wr(TGT_PARAM, 8, 0);   // exact updates
    wr(TGT_PARAM, 9, 40); wr(TGT_PARAM, 10, 0);
    rd(TGT_PARAM, 3, d); chk("param readback", d, 16'h0345);
    for (int w = 0; w < N/2; w++) begin
      th[w] = $urandom_range(100, 400); al[w] = $urandom_range(3500, 4095);
      // theta = bits 115:100, alpha = bits 127:116 -> bytes 12..15
      begin
        logic [127:0] word; word = '0; word[115:100] = 16'(th[w]); word[127:116] = 12'(al[w]);
        for (int b = 12; b < 16; b++) wr(TGT_NEUR, w*16 + b, word[b*8 +: 8]);
        for (int b = 0; b < 12; b++) wr(TGT_NEUR, w*16 + b, 0);
      end
    end
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
      wi[j][i] = $urandom_range(0, 80) - 20; wr_[j][i] = $urandom_range(0, 60) - 30;
      wr(TGT_WINP, i*256 + j, wi[j][i]);   // word i*16 + j/16, byte j%16 -> byte address i*256 + j
      wr(TGT_WREC, i*256 + j, wr_[j][i]);
    end
    for (int j = 0; j < N; j++) for (int k = 0; k < 16; k++) begin
      wo[k][j] = $urandom_range(0, 40) - 20; wr(TGT_WOUT, j*16 + k, wo[k][j]);
    end
    rd(TGT_WINP, 3*256 + 5, d); chk("winp readback", $signed(d[7:0]), wi[5][3]);
    rd(TGT_WOUT, 7*16 + 2, d);  chk("wout readback", $signed(d[7:0]), wo[2][7]);
    rd(TGT_NEUR, 2*16 + 12, d); chk("neur readback", d[7:0], {4'(th[2]), 4'd0});   // byte 12 = theta[3:0], 4 state bits

    // ---- clear, then one step with known inputs ----
    sample_clr = 1; @(negedge clk); sample_clr = 0; while (busy) @(negedge clk); c_clr++;
    begin
      int ins [6] = '{0, 2, 3, 7, 11, 13};
      logic [255:0] xs; xs = '0;
      foreach (ins[e]) begin aer(ins[e]); xs[ins[e]] = 1; end
      step(cyc);
      s = $countones(xs);
      chk("cycles step 1", cyc, N*(1+s) + N + 5);
      if (s < 256) c_sparse++;
      for (int j = 0; j < N; j++) begin
        longint u; u = 0;
        for (int i = 0; i < N; i++) if (xs[i]) u += wi[j][i] << sh_inp;
        spk[j] = (u - th[j/2] > 0);
      end
      chk("spikes step 1", dut.z_nxt[N-1:0], spk);
      for (int k = 0; k < 16; k++) begin
        longint y; y = 0;
        for (int j = 0; j < N; j++) if (spk[j]) y += wo[k][j] << sh_out;
        chk("y step 1", $signed(y_out[k]), y);
      end
      begin
        int best; best = 0;
        for (int k = 1; k < 16; k++) if ($signed(y_out[k]) > $signed(y_out[best])) best = k;
        chk("decision", decision, best);
      end
      rd(TGT_Y, 4, d); chk("y over spi", $signed(d), $signed(y_out[4]));
      // one step after the clear, the running sums equal the outputs
      rd(TGT_Y, 16 + 4, d); chk("sum low over spi", d, y_out[4]);
      rd(TGT_Y, 32 + 4, d); chk("sum high over spi", d, y_out[4][15] ? 16'hFFFF : 16'h0000);
    end

    // ---- a learning step ----
    wr(TGT_PARAM, 5, 16'b11100);     // reg_en, learn_en, class mode
    for (int k = 0; k < 16; k++) begin
      @(negedge clk); tgt_we = 1; tgt_idx = 4'(k); tgt_val = (k == 3) ? 16'sd300 : -16'sd100;
    end
    @(negedge clk); tgt_we = 0; sup_valid = 1;
    aer(1); aer(2); aer(9);
    step(cyc); c_learn++;
    sup_valid = 0;
    begin
      int e [16]; int ls [N]; int st [N]; int rg [N];
      neuron_t nn [N];
      logic [15:0][15:0] bp; logic [4:0][4:0] vv;
      for (int k = 0; k < 16; k++) e[k] = (k == 3 ? 300 : -100) - int'($signed(y_out[k]));
      for (int j = 0; j < N; j++) nn[j] = getn(j);
      for (int j = 0; j < N; j++) begin
        longint sum; sum = 0;
        for (int k = 0; k < 16; k++) sum += wo[k][j] * e[k];
        ls[j] = int'(sum >>> 7);
        if (ls[j] > 32767) ls[j] = 32767; if (ls[j] < -32768) ls[j] = -32768;
        // default STE: breakpoints -512,-256,256,512 values 0,4,8,4,0
        begin
          int uu; uu = int'(nn[j].u);
          st[j] = (uu < -512) ? 0 : (uu < -256) ? 4 : (uu < 256) ? 8 : (uu < 512) ? 4 : 0;
        end
        rg[j] = (int'(nn[j].tr_rec) > 40) ? -(int'(nn[j].tr_rec) - 40) : 0;
        if (nn[j].tr_out != 0) for (int k = 0; k < 16; k++) wo[k][j] = clamp8(longint'(wo[k][j]) + e[k] * int'(nn[j].tr_out));
      end
      for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) if (st[j] != 0) begin
        if (nn[i].tr_inp != 0) wi[j][i]  = clamp8(longint'(wi[j][i])  + longint'(nn[i].tr_inp) * st[j] * ls[j] + rg[j]);
        if (nn[i].tr_rec != 0) wr_[j][i] = clamp8(longint'(wr_[j][i]) + longint'(nn[i].tr_rec) * st[j] * ls[j] + rg[j]);
      end
      for (int j = 0; j < N; j++) for (int k = 0; k < 16; k++)
        chk("wout after learning", $signed(dut.u_wout.mem[j][k*8 +: 8]), wo[k][j]);
      for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
        chk("winp after learning", $signed(dut.u_winp.mem[i*16][j*8 +: 8]), wi[j][i]);
        chk("wrec after learning", $signed(dut.u_wrec.mem[i*16][j*8 +: 8]), wr_[j][i]);
      end
      rd(TGT_WOUT, 5*16 + 3, d); chk("wout over spi", $signed(d[7:0]), wo[3][5]);
    end

    // ---- more steps: noise, sigmoid, regression, recurrence ----
    wr(TGT_PARAM, 8, 6); wr(TGT_PARAM, 7, 4); wr(TGT_PARAM, 6, 10);
    for (int t = 0; t < 12; t++) begin
      int flags; logic [255:0] xs; int nz;
      flags = 16'b00100 | (t % 3 == 1 ? 16'b00010 : 0) | (t % 2 ? 16'b00001 : 0) | (t >= 8 ? 16'b01000 : 0);
      if (t == 6) begin flags = flags & ~16'b00100; c_mode++; end
      wr(TGT_PARAM, 5, flags);
      for (int e2 = 0; e2 < 4; e2++) aer($urandom_range(0, 15));
      @(negedge clk);
      xs = dut.x_nxt; nz = $countones(dut.z_nxt | xs);
      if (dut.z_nxt != 0) c_rec++;
      sup_valid = (t >= 8);
      step(cyc);
      if (t < 8) chk("cycles", cyc, N*(1+nz) + N + 5);
      else begin
        chk("cycles learning", cyc, N*(1+nz) + N + 5 + 2 + N*(N+16)/8 + 1);
        c_learn++;
      end
      sup_valid = 0;
      if (t % 3 == 1) begin
        for (int k = 0; k < 16; k++) begin
          checks++; if ($signed(y_out[k]) < 0 || $signed(y_out[k]) > 256) failures++;
          if ($signed(dut.y[k]) + 128 < 0 || $signed(dut.y[k]) + 128 > 256) c_sig++;
        end
      end
      if (t == 6) chk("regression output", $signed(decision), $signed(y_out[0]));
      else begin
        checks++; if (decision > 15) failures++;
      end
    end
    chk("timestep", timestep, 14);

    $display("mechanisms: aer=%0d sparse_steps=%0d spikes=%0d out_adds=%0d recurrent_steps=%0d learn_steps=%0d upd=%0d skip=%0d sigmoid_clamps=%0d mode_switch=%0d clear=%0d",
             c_aer, c_sparse, c_spk, c_outadd, c_rec, c_learn, c_upd, c_skip, c_sig, c_mode, c_clr);
    checks++; if (c_aer == 0) failures++;
    checks++; if (c_sparse == 0) failures++;
    checks++; if (c_spk == 0) failures++;
    checks++; if (c_outadd == 0) failures++;
    checks++; if (c_rec == 0) failures++;
    checks++; if (c_learn == 0) failures++;
    checks++; if (c_upd == 0) failures++;
    checks++; if (c_skip == 0) failures++;
    checks++; if (c_sig == 0) failures++;
    checks++; if (c_mode == 0) failures++;
    checks++; if (c_clr == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
