// tb_aer_decoder: a sender model performs four-phase handshakes with random
// addresses and random gaps. Checks: each event appears exactly once on
// ev_valid with its address, ack rises within 4 cycles of req and falls
// within 4 cycles of req falling, and no event appears without a request.
module tb_aer_decoder;
  logic clk = 0, rst_n = 0, aer_req = 0, aer_ack, ev_valid;
  logic [7:0] aer_addr = 0, ev_addr;
  int checks = 0, failures = 0, nev = 0;
  logic [7:0] sent [$];
  aer_decoder dut (.clk, .rst_n, .aer_req, .aer_addr, .aer_ack, .ev_valid, .ev_addr);
  always #5 clk = ~clk;
  initial begin
    #500000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(posedge clk) if (rst_n && ev_valid) begin
    nev++;
    checks++;
    if (sent.size() == 0) begin failures++; $display("spurious event"); end
    else begin
      logic [7:0] e; e = sent.pop_front();
      if (ev_addr !== e) begin failures++; $display("addr %0d exp %0d", ev_addr, e); end
    end
  end
  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 100; n++) begin
      int t;
      repeat ($urandom_range(0, 5)) @(negedge clk);
      aer_addr = 8'($urandom()); sent.push_back(aer_addr);
      if (n == 0) aer_addr = 8'd255;
      if (n == 0) sent[0] = 8'd255;
      aer_req = 1; t = 0;
      do begin @(negedge clk); t++; end while (!aer_ack && t < 20);
      checks++; if (t > 4) begin failures++; $display("ack late %0d", t); end
      aer_addr = 8'($urandom());   // address may change once acknowledged
      aer_req = 0; t = 0;
      do begin @(negedge clk); t++; end while (aer_ack && t < 20);
      checks++; if (t > 4) begin failures++; $display("ack release late %0d", t); end
    end
    repeat (10) @(negedge clk);
    checks++; if (nev != 100) begin failures++; $display("events %0d", nev); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
