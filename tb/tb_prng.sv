// tb_prng: checks the 16-bit LFSR against an independent shift-register
// model (Fibonacci form of the same polynomial computed bit by bit), that it
// holds when not enabled, and that its period is 65535.
module tb_prng;
  logic clk = 0, rst_n = 0, en = 0;
  logic [15:0] rnd;
  int checks = 0, failures = 0;
  prng #(.SEED(16'hACE1)) dut (.clk, .rst_n, .en, .rnd);
  always #5 clk = ~clk;
  initial begin
    #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  function automatic logic [15:0] nxt(input logic [15:0] s);
    // Galois step written as: shift right, and if the output bit was 1 flip
    // taps 16,14,13,11 (bit positions 15,13,12,10).
    logic [15:0] r;
    r = s >> 1;
    if (s[0]) begin r[15] = ~r[15]; r[13] = ~r[13]; r[12] = ~r[12]; r[10] = ~r[10]; end
    return r;
  endfunction
  logic [15:0] m;
  int period;
  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++; if (rnd !== 16'hACE1) begin failures++; $display("seed %h", rnd); end
    m = 16'hACE1;
    en = 1;
    for (int i = 0; i < 200; i++) begin
      @(negedge clk); m = nxt(m);
      checks++; if (rnd !== m) begin failures++; $display("step %0d %h exp %h", i, rnd, m); end
    end
    en = 0; repeat (5) @(negedge clk);
    checks++; if (rnd !== m) failures++;
    en = 1; period = 0;
    do begin @(negedge clk); period++; end while (rnd != m && period < 70000);
    checks++; if (period != 65535) begin failures++; $display("period %0d", period); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
