// tb_reckon_full: the processor at its full size (256 inputs, 256 hidden
// neurons, 16 outputs, all memories at their full depth), as configured by
// reset. Memories are filled with random weights, thresholds and leaks by the
// testbench. After a clear, it sends 24 address events and checks the spikes
// of all 256 neurons against a reference, the output values, and the cycle
// count N(1+S) + N + 5; runs two more steps with recurrent activity; then a
// learning step, checking its extra N(N+16)/8 + 3 cycles and that weights
// of all three matrices changed.
module tb_reckon_full;
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
  int checks = 0, failures = 0, nupd = 0;
  localparam int N = 256;

  reckon_top dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n) nupd += int'(mon_upd);
  initial begin
    #100000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(string s, longint got, longint exp);
    checks++; if (got != exp) begin failures++; if (failures < 20) $display("%s got %0d exp %0d", s, got, exp); end
  endtask
  task automatic aer(input int a);
    aer_addr = 8'(a); aer_req = 1;
    while (!aer_ack) @(negedge clk);
    aer_req = 0;
    while (aer_ack) @(negedge clk);
  endtask
  task automatic spi_wr(input logic [2:0] tgt, input int addr, input int data);
    logic [39:0] f; f = {1'b1, tgt, 20'(addr), 16'(data)};
    spi_cs_n = 0; repeat (4) @(negedge clk);
    for (int b = 39; b >= 0; b--) begin
      spi_mosi = f[b]; repeat (4) @(negedge clk); spi_sck = 1; repeat (4) @(negedge clk); spi_sck = 0;
    end
    repeat (4) @(negedge clk); spi_cs_n = 1; repeat (6) @(negedge clk);
  endtask
  task automatic step(output int cyc);
    step_req = 1; @(negedge clk); step_req = 0; cyc = 1;
    while (busy && cyc < 10000000) begin @(negedge clk); cyc++; end
  endtask
  function automatic int wgt(logic [127:0] w, int j); return int'($signed(w[(j%16)*8 +: 8])); endfunction

  logic [127:0] wi0 [4096], wr0 [4096], wo0 [512];
  initial begin
    int cyc, s;
    logic [255:0] xs, spk;
    for (int a = 0; a < 4096; a++) begin
      logic [127:0] p, q;
      for (int b = 0; b < 16; b++) begin p[b*8 +: 8] = 8'($urandom_range(0, 40) - 16); q[b*8 +: 8] = 8'($urandom_range(0, 30) - 15); end
      dut.u_winp.mem[a] = p; dut.u_wrec.mem[a] = q;
    end
    for (int a = 0; a < 512; a++) begin
      logic [127:0] p;
      for (int b = 0; b < 16; b++) p[b*8 +: 8] = 8'($urandom_range(0, 40) - 20);
      dut.u_wout.mem[a] = p;
    end
    for (int w = 0; w < 128; w++) begin
      nword_t nw; nw = '0; nw.theta = 16'($urandom_range(100, 900)); nw.alpha = 12'($urandom_range(3800, 4095));
      dut.u_neur.mem[w] = nw;
    end
    repeat (3) @(negedge clk); rst_n = 1; repeat (3) @(negedge clk);
    chk("default N", dut.cfg.n_neur, 256);
    sample_clr = 1; @(negedge clk); sample_clr = 0; while (busy) @(negedge clk);

    // step 1 from rest: exact spike reference
    xs = '0;
    for (int e = 0; e < 24; e++) begin int a; a = $urandom_range(0, 255); aer(a); xs[a] = 1; end
    @(negedge clk);
    s = $countones(xs);
    step(cyc);
    chk("cycles step 1", cyc, N*(1+s) + N + 5);
    for (int j = 0; j < N; j++) begin
      longint u; nword_t nw;
      u = 0;
      for (int i = 0; i < 256; i++) if (xs[i]) u += longint'(wgt(dut.u_winp.mem[i*16 + j/16], j)) << 4;   // sh_inp = 4
      nw = dut.u_neur.mem[j/2];
      spk[j] = (u - longint'(nw.theta) > 0);
    end
    chk("spikes step 1", dut.z_nxt, spk);
    $display("step 1: %0d inputs, %0d spikes, %0d cycles", s, $countones(spk), cyc);
    for (int k = 0; k < 16; k++) begin
      longint y; y = 0;
      for (int j = 0; j < N; j++) if (spk[j]) y += longint'($signed(dut.u_wout.mem[j][k*8 +: 8])) << 4;  // sh_out = 4
      if (y > 32767) y = 32767; if (y < -32768) y = -32768;
      chk("y step 1", $signed(y_out[k]), y);
    end

    // two steps with recurrence
    for (int t = 0; t < 2; t++) begin
      for (int e = 0; e < 16; e++) aer($urandom_range(0, 255));
      @(negedge clk);
      s = $countones(dut.x_nxt | dut.z_nxt);
      step(cyc);
      chk("cycles", cyc, N*(1+s) + N + 5);
      $display("step %0d: %0d active entries, %0d cycles", t + 2, s, cyc);
    end

    // learning step
    for (int a = 0; a < 4096; a++) begin wi0[a] = dut.u_winp.mem[a]; wr0[a] = dut.u_wrec.mem[a]; end
    for (int a = 0; a < 512; a++) wo0[a] = dut.u_wout.mem[a];
    spi_wr(TGT_PARAM, 5, 16'b01100);   // learning on, classification
    for (int k = 0; k < 16; k++) begin
      @(negedge clk); tgt_we = 1; tgt_idx = 4'(k); tgt_val = (k == 0) ? 16'sd256 : 16'sd0;
    end
    @(negedge clk); tgt_we = 0;
    for (int e = 0; e < 16; e++) aer($urandom_range(0, 255));
    @(negedge clk);
    s = $countones(dut.x_nxt | dut.z_nxt);
    sup_valid = 1;
    step(cyc);
    sup_valid = 0;
    chk("cycles learning", cyc, N*(1+s) + N + 5 + N*(N+16)/8 + 3);
    $display("learning step: %0d cycles, of which weight update %0d", cyc, N*(N+16)/8 + 3);
    begin
      int ci, cr, co;
      ci = 0; cr = 0; co = 0;
      for (int a = 0; a < 4096; a++) begin ci += int'(wi0[a] != dut.u_winp.mem[a]); cr += int'(wr0[a] != dut.u_wrec.mem[a]); end
      for (int a = 0; a < 256; a++) co += int'(wo0[a] != dut.u_wout.mem[a]);
      for (int a = 256; a < 512; a++) chk("upper W_out untouched", dut.u_wout.mem[a] == wo0[a], 1);
      $display("words changed: W_inp %0d, W_rec %0d, W_out %0d; update groups %0d", ci, cr, co, nupd);
      checks++; if (ci == 0 || cr == 0 || co == 0) failures++;
    end
    chk("timestep", timestep, 4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
