// tb_loss: writes random targets, applies random outputs and checks
// err = sat16(y* - y) for enabled outputs and 0 for disabled ones.
module tb_loss;
  import reckon_pkg::*;
  logic clk = 0, rst_n = 0, tgt_we = 0;
  logic [3:0] tgt_idx = 0;
  logic signed [15:0] tgt_val = 0;
  logic [4:0] n_out = 16;
  logic signed [15:0][15:0] y, err;
  int tg [16];
  int checks = 0, failures = 0;
  loss dut (.*);
  always #5 clk = ~clk;
  initial begin
    #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    y = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int k = 0; k < 16; k++) tg[k] = 0;
    for (int n = 0; n < 300; n++) begin
      int e;
      @(negedge clk);
      tgt_we = 1; tgt_idx = 4'($urandom()); tgt_val = 16'($urandom());
      if (n % 4 == 0) tgt_val = 16'($urandom_range(0, 512));
      tg[tgt_idx] = int'(tgt_val);
      @(negedge clk); tgt_we = 0;
      n_out = 5'($urandom_range(1, 16));
      for (int k = 0; k < 16; k++) y[k] = (n % 2) ? 16'($urandom()) : 16'($urandom_range(0, 256));
      #1;
      for (int k = 0; k < 16; k++) begin
        e = tg[k] - int'($signed(y[k]));
        if (e > 32767) e = 32767; if (e < -32768) e = -32768;
        if (k >= n_out) e = 0;
        checks++; if (int'($signed(err[k])) != e) begin failures++; if (failures < 10) $display("k %0d err %0d exp %0d", k, err[k], e); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
