// tb_li_output: drives random integrations (weight words), decays and
// clears, and checks each output against a model: exact saturating adds of
// w << sh_out, and decays that must lie at floor(y*kappa/256) or one above
// (the model then follows the block's value so that errors do not add up).
// Also checks the hard sigmoid, the running sums of the outputs, the
// decision (largest sum among n_out outputs) and the regression selection.
module tb_li_output;
  import reckon_pkg::*;
  logic clk = 0, rst_n = 0, clr = 0, int_en = 0, dec_en = 0, acc_en = 0;
  logic [127:0] w_word = 0;
  logic [15:0] rnd = 0, decision;
  cfg_t cfg;
  logic signed [15:0][15:0] y, y_act;
  logic signed [15:0][31:0] y_sum;
  longint m [16], sm [16];
  int checks = 0, failures = 0, nsat = 0;
  li_output dut (.*);
  always #5 clk = ~clk;
  initial begin
    #5000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  function automatic longint fdiv(longint v, int s);
    longint q; q = v / (64'sd1 << s); if (v < 0 && q * (64'sd1 << s) != v) q--; return q;
  endfunction
  function automatic longint act(longint v);
    return cfg.sig_en ? ((v + 128 < 0) ? 0 : ((v + 128 > 256) ? 256 : v + 128)) : v;
  endfunction
  initial begin
    cfg = '0; cfg.kappa = 8'd200; cfg.sh_out = 4'd3; cfg.n_out = 5'd16;
    for (int k = 0; k < 16; k++) begin m[k] = 0; sm[k] = 0; end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      int op;
      @(negedge clk);
      op = $urandom_range(0, 99);
      int_en = (op < 60); dec_en = (op >= 60 && op < 97); clr = (op >= 99);
      w_word = {$urandom(), $urandom(), $urandom(), $urandom()};
      rnd = 16'($urandom()); acc_en = 1'($urandom());
      cfg.sig_en = 1'($urandom());
      cfg.sh_out = 4'($urandom_range(0, 8)); cfg.kappa = 8'($urandom_range(150, 255));
      @(posedge clk); #1;
      for (int k = 0; k < 16; k++) begin
        if (clr) m[k] = 0;
        else if (int_en) begin
          m[k] = m[k] + longint'($signed(w_word[k*8 +: 8])) * (64'sd1 << cfg.sh_out);
          if (m[k] > 32767) begin m[k] = 32767; nsat++; end
          if (m[k] < -32768) begin m[k] = -32768; nsat++; end
          checks++; if (longint'($signed(y[k])) != m[k]) begin failures++; if (failures < 10) $display("int k%0d %0d exp %0d", k, y[k], m[k]); end
        end else if (dec_en) begin
          longint f; f = fdiv(m[k] * cfg.kappa, 8);
          checks++;
          if (!(longint'($signed(y[k])) == f || longint'($signed(y[k])) == f + 1)) begin failures++; if (failures < 10) $display("dec k%0d %0d exp~%0d", k, y[k], f); end
          m[k] = longint'($signed(y[k]));
        end
        if (clr) sm[k] = 0;
        else if (acc_en) sm[k] += act(m[k]);
        checks++; if (longint'($signed(y_sum[k])) != sm[k]) begin failures++; if (failures < 10) $display("sum k%0d %0d exp %0d", k, y_sum[k], sm[k]); end
      end
      // readout checks
      cfg.class_mode = 1'($urandom()); cfg.n_out = 5'($urandom_range(1, 16));
      cfg.out_sel = 4'($urandom());
      #1;
      begin
        longint a [16]; int best;
        best = 0;
        for (int k = 0; k < 16; k++) begin
          a[k] = act(m[k]);
          checks++; if (longint'($signed(y_act[k])) != a[k]) failures++;
        end
        for (int k = 1; k < int'(cfg.n_out); k++) if (sm[k] > sm[best]) best = k;
        checks++;
        if (cfg.class_mode ? (decision != 16'(best)) : (longint'($signed(decision)) != a[cfg.out_sel])) begin
          failures++; $display("decision %0d", decision);
        end
      end
    end
    checks++; if (nsat == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
