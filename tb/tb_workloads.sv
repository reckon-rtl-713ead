// tb_workloads: the processor at its default size running the three kinds of
// task it is meant for, with synthetic address-event streams of the right
// shape, plus a run over the longest supported sample.
//
//  1. Delayed cue-integration navigation (40 inputs, 40 hidden neurons, one
//     output with hard sigmoid, 2250 steps of 1 ms per trial): channels 0-9
//     fire during left cues, 10-19 during right cues, 20-29 during the recall
//     window and 30-39 carry background noise. Seven 100-step cues with
//     50-step gaps are followed by a delay and a 150-step recall window, the
//     only part of the trial with supervision (target 1.0 for left, 0.0 for
//     right; the output read against 0.5 is the decision). Checks: cycle
//     count of every step, no weight write before the recall window, weights
//     changed after it, input eligibility traces still ordering the two sides
//     after the delay, timestep counter, decision range.
//  2. Keyword-spotting size (234 input channels, 256 hidden neurons, two
//     outputs, 104 steps per sample, supervised throughout): checks the cycle
//     count of every step, that the unused channels stay silent, and that the
//     decision is the output with the larger average over the sample.
//  3. Gesture size (256 inputs, 256 hidden neurons, ten outputs, 1318
//     steps, supervised throughout): checks the cycle count of every step and,
//     after every step, that the decision is the output with the highest
//     average so far.
//  4. Timespan (16 hidden neurons): 32770 sparse steps; the timestep counter
//     must stop at 32767 and a supervised step must still update weights.
//
// The forward step takes N(1 + S) + N + 5 cycles (S = active entries of the
// input and spike maps); a learning step adds ceil(N/16)(32 + 2N) + 3. The
// testbench prints cycles per step and the fraction of hidden-weight updates
// that were applied rather than skipped.
module tb_workloads;
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
  longint nupd = 0, nskip = 0, cyc_tot = 0, steps_tot = 0;

  reckon_top dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n) begin nupd += longint'(mon_upd); nskip += longint'(mon_skip); end
  initial begin
    #2000000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(string s, longint got, longint exp);
    checks++; if (got != exp) begin failures++; if (failures < 20) $display("%s got %0d exp %0d", s, got, exp); end
  endtask
  task automatic chk_true(string s, bit c);
    checks++; if (!c) begin failures++; if (failures < 20) $display("failed: %s", s); end
  endtask
  task automatic aer(input int a);
    aer_addr = 8'(a); aer_req = 1;
    while (!aer_ack) @(negedge clk);
    aer_req = 0;
    while (aer_ack) @(negedge clk);
  endtask
  task automatic spi_wr(input logic [2:0] tgt, input int addr, input int data);
    logic [39:0] f; f = {1'b1, tgt, 20'(addr), 16'(data)};
    spi_cs_n = 0; repeat (2) @(negedge clk);
    for (int b = 39; b >= 0; b--) begin
      spi_mosi = f[b]; repeat (2) @(negedge clk); spi_sck = 1; repeat (2) @(negedge clk); spi_sck = 0;
    end
    repeat (2) @(negedge clk); spi_cs_n = 1; repeat (4) @(negedge clk);
  endtask
  task automatic set_targets(input int n_out, input int cls);
    for (int k = 0; k < n_out; k++) begin
      @(negedge clk); tgt_we = 1; tgt_idx = 4'(k); tgt_val = (k == cls) ? 16'sd256 : 16'sd0;
    end
    @(negedge clk); tgt_we = 0;
  endtask
  task automatic clear_sample();
    @(negedge clk); sample_clr = 1; @(negedge clk); sample_clr = 0;
    while (busy) @(negedge clk);
  endtask

  // One timestep with its cycle-count check. Events must already be sent.
  task automatic run_step(input int n, input bit sup, input bit learn);
    int s, cyc, exp;
    @(negedge clk);
    s = $countones(dut.x_nxt | dut.z_nxt);
    exp = n*(1+s) + n + 5 + ((sup && learn) ? ((n + 15)/16)*(32 + 2*n) + 3 : 0);
    sup_valid = sup;
    step_req = 1; @(negedge clk); step_req = 0; cyc = 1;
    while (busy && cyc < 1000000) begin @(negedge clk); cyc++; end
    sup_valid = 0;
    chk("step cycles", cyc, exp);
    cyc_tot += cyc; steps_tot++;
  endtask

  // Random initial weights and neuron parameters through the memory arrays.
  task automatic init_mem(input int wi_lo, input int wi_hi, input int wr_lo, input int wr_hi,
                          input int th_lo, input int th_hi, input int al_lo, input int al_hi);
    for (int a = 0; a < 4096; a++) begin
      logic [127:0] p, q;
      for (int b = 0; b < 16; b++) begin
        p[b*8 +: 8] = 8'($urandom_range(0, wi_hi - wi_lo) + wi_lo);
        q[b*8 +: 8] = 8'($urandom_range(0, wr_hi - wr_lo) + wr_lo);
      end
      dut.u_winp.mem[a] = p; dut.u_wrec.mem[a] = q;
    end
    for (int a = 0; a < 512; a++) begin
      logic [127:0] p;
      for (int b = 0; b < 16; b++) p[b*8 +: 8] = 8'($urandom_range(0, 40) - 20);
      dut.u_wout.mem[a] = p;
    end
    for (int w = 0; w < 128; w++) begin
      nword_t nw; nw = '0;
      nw.theta = 16'($urandom_range(th_lo, th_hi)); nw.alpha = 12'($urandom_range(al_lo, al_hi));
      dut.u_neur.mem[w] = nw;
    end
  endtask

  function automatic longint whash();
    longint h; h = 0;
    for (int a = 0; a < 4096; a++) h = h * 31 + longint'(dut.u_winp.mem[a][63:0] ^ dut.u_winp.mem[a][127:64]);
    for (int a = 0; a < 4096; a++) h = h * 31 + longint'(dut.u_wrec.mem[a][63:0] ^ dut.u_wrec.mem[a][127:64]);
    for (int a = 0; a < 512; a++)  h = h * 31 + longint'(dut.u_wout.mem[a][63:0] ^ dut.u_wout.mem[a][127:64]);
    return h;
  endfunction

  function automatic int tr_inp_of(int j);
    nword_t nw; nw = dut.u_neur.mem[j/2];
    return (j % 2) ? int'(nw.n1.tr_inp) : int'(nw.n0.tr_inp);
  endfunction

  // Bernoulli event with probability num/1000.
  function automatic bit fires(int num); return $urandom_range(0, 999) < num; endfunction

  task automatic report(string name);
    $display("%s: %0d steps, %0.1f cycles/step (%0.1f us at 115 MHz), hidden updates applied %0d of %0d",
             name, steps_tot, real'(cyc_tot) / real'(steps_tot), real'(cyc_tot) / real'(steps_tot) / 115.0,
             nupd, nupd + nskip);
    cyc_tot = 0; steps_tot = 0; nupd = 0; nskip = 0;
  endtask

  initial begin
    repeat (3) @(negedge clk); rst_n = 1; repeat (3) @(negedge clk);

    // ---------------- 1. navigation ----------------
    begin
      localparam int N = 40, T = 2250, T_RECALL = 2100;
      int ncorrect; ncorrect = 0;
      init_mem(-8, 40, -10, 10, 600, 1200, 4095, 4095);
      spi_wr(TGT_PARAM, 0, N);
      spi_wr(TGT_PARAM, 1, 1);
      spi_wr(TGT_PARAM, 5, 16'b01010);   // learning on, regression, hard sigmoid
      for (int trial = 0; trial < 4; trial++) begin
        int side [7]; int nl, cls; longint h0, h1; int tl, tr;
        nl = 0;
        // majority of at least 5 of 7 cues, alternating sides between trials
        for (int c = 0; c < 7; c++) side[c] = (c < 5) ? trial % 2 : 1 - trial % 2;
        for (int c = 6; c > 0; c--) begin int r, t; r = $urandom_range(0, c); t = side[c]; side[c] = side[r]; side[r] = t; end
        for (int c = 0; c < 7; c++) nl += int'(side[c] == 0);
        cls = (nl > 3) ? 0 : 1;
        clear_sample();
        set_targets(1, cls);
        h0 = whash();
        for (int t = 0; t < T; t++) begin
          int c; bit in_cue;
          c = t / 150; in_cue = (c < 7) && (t % 150 < 100);
          for (int ch = 0; ch < 10; ch++) begin
            if (in_cue && side[c] == 0 && fires(40)) aer(ch);
            if (in_cue && side[c] == 1 && fires(40)) aer(10 + ch);
            if (t >= T_RECALL && fires(40)) aer(20 + ch);
            if (fires(10)) aer(30 + ch);
          end
          if (t == T_RECALL) begin
            h1 = whash();
            chk("no weight write before supervision", h1, h0);
            tl = 0; tr = 0;
            for (int ch = 0; ch < 10; ch++) begin tl += tr_inp_of(ch); tr += tr_inp_of(10 + ch); end
            chk_true("input traces keep the cue majority over the delay", (cls == 0) ? tl > tr : tr > tl);
          end
          run_step(N, t >= T_RECALL, 1'b1);
        end
        chk("timestep at end of trial", timestep, T);
        chk_true("weights learned in recall window", whash() != h0);
        chk_true("output within [0, 1]", decision <= 256);
        ncorrect += int'((decision > 128) == (cls == 0));
        $display("navigation trial %0d: %0d left cues, traces L %0d R %0d, output %0d/256 -> %s",
                 trial, nl, tl, tr, decision, decision > 128 ? "left" : "right");
      end
      report("navigation");
    end

    // ---------------- 2. keyword spotting size ----------------
    begin
      localparam int N = 256, CH = 234, T = 104;
      init_mem(-12, 24, -8, 8, 1500, 3000, 3900, 4095);
      spi_wr(TGT_PARAM, 0, N);
      spi_wr(TGT_PARAM, 1, 2);
      spi_wr(TGT_PARAM, 5, 16'b01110);   // learning on, classification, hard sigmoid
      for (int smp = 0; smp < 2; smp++) begin
        int band; longint sum [2];
        sum[0] = 0; sum[1] = 0;
        clear_sample();
        set_targets(2, smp);
        band = smp * 100;   // the keyword and the filler excite different channel bands
        for (int t = 0; t < T; t++) begin
          for (int ch = 0; ch < CH; ch++)
            if (fires((ch >= band && ch < band + 134) ? 60 : 5)) aer(ch);
          @(negedge clk);
          chk("unused channels silent", dut.x_nxt[255:CH], 0);
          run_step(N, 1'b1, 1'b1);
          for (int k = 0; k < 2; k++) sum[k] += longint'($signed(y_out[k]));
        end
        chk("timestep", timestep, T);
        chk("decision = larger average output", decision, (sum[1] > sum[0]) ? 1 : 0);
        $display("keyword sample %0d: decision %0d, y = %0d %0d", smp, decision, y_out[0], y_out[1]);
      end
      report("keyword spotting");
    end

    // ---------------- 3. gesture size ----------------
    begin
      localparam int N = 256, T = 1318;
      longint sum [10]; int nmatch;
      nmatch = 0;
      for (int k = 0; k < 10; k++) sum[k] = 0;
      spi_wr(TGT_PARAM, 1, 10);
      clear_sample();
      set_targets(10, 3);
      for (int t = 0; t < T; t++) begin
        int best;
        // a blob sweeping across the 16x16 retina
        for (int px = 0; px < 256; px++) begin
          int r, c, d;
          r = px / 16; c = px % 16; d = (c - (t / 8) % 16); d = d < 0 ? -d : d;
          if (fires((d < 2 && r > 4 && r < 12) ? 200 : 4)) aer(px);
        end
        run_step(N, 1'b1, 1'b1);
        // the decision may be read after any step: highest average so far
        best = 0;
        for (int k = 0; k < 10; k++) begin
          sum[k] += longint'($signed(y_out[k]));
          if (sum[k] > sum[best]) best = k;
        end
        chk("decision after each step", decision, best);
        nmatch += int'(decision == 3);
      end
      $display("gesture sample: decision %0d, equal to the label after %0d of %0d steps", decision, nmatch, T);
      report("gesture");
    end

    // ---------------- 4. maximum timespan ----------------
    begin
      localparam int N = 16;
      longint h0;
      spi_wr(TGT_PARAM, 0, N);
      spi_wr(TGT_PARAM, 1, 2);
      spi_wr(TGT_PARAM, 5, 16'b00110);   // learning off
      clear_sample();
      for (int t = 0; t < 32770; t++) begin
        if (t % 64 == 0) aer(t / 64 % 16);
        run_step(N, 1'b0, 1'b0);
      end
      chk("timestep counter saturates", timestep, 32767);
      spi_wr(TGT_PARAM, 5, 16'b01110);
      set_targets(2, 0);
      h0 = whash();
      for (int t = 0; t < 4; t++) begin
        for (int ch = 0; ch < 16; ch++) aer(ch);
        run_step(N, 1'b1, 1'b1);
      end
      chk_true("learning after the longest sample", whash() != h0);
      chk("timestep", timestep, 32767);
      report("timespan");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
