// tb_sparsity_map: random sets, swaps and clears against a model of the two
// maps; also walks the current map with first_set as the controller does and
// checks that exactly the set indices are visited in increasing order.
module tb_sparsity_map;
  logic clk = 0, rst_n = 0, set_en = 0, swap = 0, clear = 0;
  logic [7:0] set_idx = 0;
  logic [255:0] cur, nxt, m_cur, m_nxt;
  logic [8:0] start;
  logic found;
  logic [7:0] idx;
  int checks = 0, failures = 0;
  sparsity_map #(.N(256)) dut (.clk, .rst_n, .set_en, .set_idx, .swap, .clear, .cur, .nxt);
  first_set #(.N(256)) fs (.vec(cur), .start, .found, .idx);
  always #5 clk = ~clk;
  initial begin
    #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    m_cur = 0; m_nxt = 0; start = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      int r;
      @(negedge clk);
      r = $urandom_range(0, 99);
      set_en = (r < 70); set_idx = 8'($urandom()); swap = (r >= 70 && r < 90) || (r == 5); clear = (r == 99);
      @(posedge clk); #1;
      if (clear) begin m_cur = 0; m_nxt = 0; end
      else begin
        if (swap) begin m_cur = m_nxt; m_nxt = 0; end
        if (set_en) m_nxt[set_idx] = 1;
      end
      checks++; if (cur !== m_cur || nxt !== m_nxt) begin failures++; $display("map mismatch at %0d", n); end
      if (swap && !clear) begin
        // walk
        int last; int cnt; last = -1; cnt = 0;
        set_en = 0; swap = 0; clear = 0;
        start = 0;
        forever begin
          #1;
          if (!found) break;
          checks++;
          if (!m_cur[idx] || int'(idx) <= last) begin failures++; $display("walk error %0d", idx); end
          last = idx; cnt++; start = 9'(idx) + 9'd1;
        end
        checks++; if (cnt != $countones(m_cur)) begin failures++; $display("walk count %0d", cnt); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
