// tb_stoch_update: exact cases (lr_shift = 0, saturation at +127/-128),
// floor/ceil bounds for random cases, and the mean of many updates of a
// sub-LSB change, which must match delta / 2^lr_shift.
module tb_stoch_update;
  logic signed [31:0] delta;
  logic [4:0] lr_shift;
  logic [15:0] rnd;
  logic signed [7:0] w, w_new;
  int checks = 0, failures = 0;
  stoch_update dut (.*);
  initial begin
    #10000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  function automatic longint clamp8(longint v); return v > 127 ? 127 : (v < -128 ? -128 : v); endfunction
  real acc;
  initial begin
    for (int n = 0; n < 5000; n++) begin
      longint fl, d;
      delta = 32'($urandom_range(0, 2000)) - 32'sd1000; if (n % 5 == 0) delta = $urandom();
      lr_shift = 5'($urandom_range(0, 16)); if (n % 7 == 0) lr_shift = 0;
      rnd = 16'($urandom()); w = 8'($urandom());
      #1;
      d = longint'(delta);
      fl = d / (64'sd1 << lr_shift); if (d < 0 && fl * (64'sd1 << lr_shift) != d) fl--;
      checks++;
      if (lr_shift == 0) begin
        if (w_new != clamp8(longint'(w) + d)) begin failures++; $display("exact %0d %0d -> %0d", w, d, w_new); end
      end else if (!(w_new == clamp8(longint'(w) + fl) || w_new == clamp8(longint'(w) + fl + 1))) begin
        failures++; $display("bound %0d %0d %0d -> %0d", w, d, lr_shift, w_new);
      end
    end
    // 3/16 on average
    acc = 0; delta = 3; lr_shift = 4; w = 0;
    for (int n = 0; n < 8000; n++) begin rnd = 16'($urandom()); #1; acc += real'(w_new); end
    acc /= 8000.0;
    checks++; if (acc < 0.16 || acc > 0.215) begin failures++; $display("mean %f", acc); end
    // negative: -5/8
    acc = 0; delta = -5; lr_shift = 3; w = 10;
    for (int n = 0; n < 8000; n++) begin rnd = 16'($urandom()); #1; acc += real'(w_new) - 10.0; end
    acc /= 8000.0;
    checks++; if (acc < -0.66 || acc > -0.59) begin failures++; $display("mean neg %f", acc); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
