// tb_param_bank: checks reset values, write/read-back of all registers and
// the decoding of every configuration field.
module tb_param_bank;
  import reckon_pkg::*;
  logic clk = 0, rst_n = 0, we = 0;
  logic [4:0] addr = 0;
  logic [15:0] wdata = 0, rdata;
  cfg_t cfg;
  logic [15:0] r [32];
  int checks = 0, failures = 0;
  param_bank dut (.*);
  always #5 clk = ~clk;
  initial begin
    #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(string s, longint got, longint exp);
    checks++; if (got != exp) begin failures++; $display("%s got %0h exp %0h", s, got, exp); end
  endtask
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk);
    chk("rst n_neur", cfg.n_neur, 256); chk("rst n_out", cfg.n_out, 16); chk("rst kappa", cfg.kappa, 243);
    chk("rst learn", cfg.learn_en, 0);
    for (int a = 0; a < 32; a++) begin
      @(negedge clk); we = 1; addr = 5'(a); wdata = 16'($urandom()); r[a] = wdata;
    end
    @(negedge clk); we = 0;
    for (int a = 0; a < 32; a++) begin addr = 5'(a); #1; chk("readback", rdata, r[a]); end
    chk("n_neur", cfg.n_neur, r[0][8:0]);   chk("n_out", cfg.n_out, r[1][4:0]);
    chk("sh_inp", cfg.sh_inp, r[2][3:0]);   chk("sh_rec", cfg.sh_rec, r[2][7:4]);  chk("sh_out", cfg.sh_out, r[2][11:8]);
    chk("inc_inp", cfg.inc_inp, r[3][3:0]); chk("inc_rec", cfg.inc_rec, r[3][7:4]); chk("inc_out", cfg.inc_out, r[3][11:8]);
    chk("kappa", cfg.kappa, r[4][7:0]);
    chk("noise_en", cfg.noise_en, r[5][0]); chk("sig_en", cfg.sig_en, r[5][1]); chk("class", cfg.class_mode, r[5][2]);
    chk("learn", cfg.learn_en, r[5][3]);    chk("reg_en", cfg.reg_en, r[5][4]);
    chk("noise_sh", cfg.noise_sh, r[6][3:0]); chk("lr_out", cfg.lr_out, r[7][4:0]); chk("lr_hid", cfg.lr_hid, r[8][4:0]);
    chk("reg_thr", cfg.reg_thr, r[9][11:0]); chk("reg_sh", cfg.reg_sh, r[10][3:0]);
    for (int b = 0; b < 4; b++) chk("bp", cfg.ste_bp[b], r[11+b]);
    chk("v0", cfg.ste_val[0], r[15][4:0]); chk("v1", cfg.ste_val[1], r[15][9:5]); chk("v2", cfg.ste_val[2], r[15][14:10]);
    chk("v3", cfg.ste_val[3], r[16][4:0]); chk("v4", cfg.ste_val[4], r[16][9:5]);
    chk("out_sel", cfg.out_sel, r[17][3:0]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
