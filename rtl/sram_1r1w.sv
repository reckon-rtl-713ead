// sram_1r1w: model of one of the on-chip SRAMs (weights or neuron states).
//
// A DEPTH x WIDTH array with one synchronous read port (data valid in the
// cycle after `re`) and one synchronous write port with byte enables. The
// processor has four such memories: input and recurrent weights (64 kB each,
// 4096 x 128 bit), output weights (8 kB, 512 x 128 bit) and neuron states
// (2 kB, 128 x 128 bit). The 128-bit word and the sizes follow the processor
// description; the port structure, the byte enables and the read latency are
// this implementation's choices. A read and a write of the same address in
// one cycle return the old word. Contents are not reset.
module sram_1r1w #(
  parameter int unsigned DEPTH = 4096,
  parameter int unsigned WIDTH = 128,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic               clk,
  input  logic               re,
  input  logic [AW-1:0]      raddr,
  output logic [WIDTH-1:0]   rdata,
  input  logic               we,
  input  logic [AW-1:0]      waddr,
  input  logic [WIDTH/8-1:0] wbe,
  input  logic [WIDTH-1:0]   wdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
  end

  always_ff @(posedge clk) begin
    if (we) begin
      for (int b = 0; b < WIDTH/8; b++)
        if (wbe[b]) mem[waddr][b*8 +: 8] <= wdata[b*8 +: 8];
    end
  end
endmodule
