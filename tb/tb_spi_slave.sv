// tb_spi_slave: an SPI master model (mode 0, sck = clk/16) sends random
// write frames and read frames. Writes must appear once on the bus with the
// frame's target, address and data; reads must issue a bus read with the
// right target and address, and the data answered by the bus model
// (address-dependent) must come back on miso in the same frame.
module tb_spi_slave;
  import reckon_pkg::*;
  logic clk = 0, rst_n = 0, sck = 0, cs_n = 1, mosi = 0, miso;
  logic req, req_we, rvalid = 0;
  tgt_e req_tgt;
  logic [19:0] req_addr;
  logic [15:0] req_wdata, rdata = 0;
  int checks = 0, failures = 0, nreq = 0;
  logic exp_we; logic [2:0] exp_tgt; logic [19:0] exp_addr; logic [15:0] exp_data;
  spi_slave dut (.*);
  always #5 clk = ~clk;
  initial begin
    #20000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  // bus model: read answers two cycles later with a function of the address
  always @(posedge clk) begin
    rvalid <= 1'b0;
    if (rst_n && req) begin
      nreq++;
      checks++;
      if (req_we !== exp_we || req_tgt !== tgt_e'(exp_tgt) || req_addr !== exp_addr || (req_we && req_wdata !== exp_data)) begin
        failures++; $display("bus req mismatch we=%b tgt=%0d addr=%h data=%h", req_we, req_tgt, req_addr, req_wdata);
      end
      if (!req_we) begin
        @(posedge clk); rvalid <= 1'b1; rdata <= req_addr[15:0] ^ 16'hA5C3;
      end
    end
  end
  task automatic frame(input logic [39:0] f, output logic [15:0] rd);
    cs_n = 0; repeat (8) @(negedge clk);
    for (int b = 39; b >= 0; b--) begin
      mosi = f[b];
      repeat (8) @(negedge clk); sck = 1;
      if (b < 16) rd[b] = miso;
      repeat (8) @(negedge clk); sck = 0;
    end
    repeat (8) @(negedge clk); cs_n = 1; repeat (16) @(negedge clk);
  endtask
  initial begin
    logic [15:0] rd;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 60; n++) begin
      exp_we = 1'($urandom()); exp_tgt = 3'($urandom_range(0, 5)); exp_addr = 20'($urandom()); exp_data = 16'($urandom());
      frame({exp_we, exp_tgt, exp_addr, exp_data}, rd);
      if (!exp_we) begin
        checks++; if (rd !== (exp_addr[15:0] ^ 16'hA5C3)) begin failures++; $display("read data %h exp %h", rd, exp_addr[15:0] ^ 16'hA5C3); end
      end
      checks++; if (nreq != n + 1) begin failures++; $display("request count %0d", nreq); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
