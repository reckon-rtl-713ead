// tb_ste_lut: random breakpoints (sorted) and values; checks the segment
// chosen for random potentials and for values exactly at each breakpoint.
module tb_ste_lut;
  import reckon_pkg::*;
  logic signed [15:0] u;
  logic [3:0][15:0] bp;
  logic [4:0][4:0] val;
  logic signed [4:0] ste;
  int checks = 0, failures = 0;
  ste_lut dut (.*);
  initial begin
    #10000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  function automatic int seg(int uu, int b0, int b1, int b2, int b3);
    if (uu < b0) return 0; if (uu < b1) return 1; if (uu < b2) return 2; if (uu < b3) return 3; return 4;
  endfunction
  int b [4];
  initial begin
    for (int n = 0; n < 500; n++) begin
      for (int i = 0; i < 4; i++) b[i] = $urandom_range(0, 8000) - 4000;
      b.sort();
      for (int i = 0; i < 4; i++) bp[i] = 16'(b[i]);
      for (int i = 0; i < 5; i++) val[i] = 5'($urandom());
      for (int m = 0; m < 24; m++) begin
        int uu;
        uu = (m < 4) ? b[m] : (m < 8 ? b[m-4] - 1 : $urandom_range(0, 10000) - 5000);
        u = 16'(uu); #1;
        checks++;
        if (ste !== $signed(val[seg(uu, b[0], b[1], b[2], b[3])])) begin
          failures++; if (failures < 10) $display("u %0d ste %0d", uu, ste);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
