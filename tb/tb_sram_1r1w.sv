// tb_sram_1r1w: writes random words with random byte enables to a
// 4096 x 128-bit memory, keeps a shadow copy, and checks that every read
// returns the shadow word one cycle later, including read-before-write
// behaviour when both ports hit the same address.
module tb_sram_1r1w;
  logic clk = 0;
  logic re = 0, we = 0;
  logic [11:0] raddr = 0, waddr = 0;
  logic [15:0] wbe = 0;
  logic [127:0] wdata = 0, rdata;
  logic [127:0] shadow [logic [11:0]];
  int checks = 0, failures = 0;
  sram_1r1w #(.DEPTH(4096), .WIDTH(128)) dut (.clk, .re, .raddr, .rdata, .we, .waddr, .wbe, .wdata);
  always #5 clk = ~clk;
  initial begin
    #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  function automatic logic [127:0] rnd128();
    return {$urandom(), $urandom(), $urandom(), $urandom()};
  endfunction
  logic [11:0] addrs [64];
  initial begin
    for (int i = 0; i < 64; i++) addrs[i] = 12'($urandom_range(0, 4095));
    addrs[0] = 0; addrs[1] = 4095;
    // full writes
    for (int i = 0; i < 64; i++) begin
      @(negedge clk); we = 1; waddr = addrs[i]; wbe = '1; wdata = rnd128();
      shadow[addrs[i]] = wdata;
    end
    // partial writes
    for (int n = 0; n < 200; n++) begin
      logic [11:0] a; logic [127:0] d; logic [15:0] be;
      a = addrs[$urandom_range(0, 63)]; d = rnd128(); be = 16'($urandom());
      @(negedge clk); we = 1; waddr = a; wbe = be; wdata = d;
      for (int b = 0; b < 16; b++) if (be[b]) shadow[a][b*8 +: 8] = d[b*8 +: 8];
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < 64; i++) begin
      @(negedge clk); re = 1; raddr = addrs[i];
      @(negedge clk); re = 0;
      checks++; if (rdata !== shadow[addrs[i]]) begin failures++; $display("addr %0d mismatch", addrs[i]); end
      @(negedge clk);
      checks++; if (rdata !== shadow[addrs[i]]) failures++;   // holds without re
    end
    // same-address read and write: old data returned
    @(negedge clk); re = 1; raddr = addrs[5]; we = 1; waddr = addrs[5]; wbe = '1; wdata = ~shadow[addrs[5]];
    @(negedge clk); re = 0; we = 0;
    checks++; if (rdata !== shadow[addrs[5]]) failures++;
    shadow[addrs[5]] = ~shadow[addrs[5]];
    @(negedge clk); re = 1; raddr = addrs[5];
    @(negedge clk); re = 0;
    checks++; if (rdata !== shadow[addrs[5]]) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
