// aer_decoder: receiver for address events from a neuromorphic sensor.
//
// A sender presents an 8-bit address and raises `aer_req`; this block
// synchronises the request into the clock domain (two flip-flops), captures
// the address, pulses `ev_valid` for one cycle with the address on `ev_addr`
// and raises `aer_ack`. It lowers `aer_ack` once the sender has lowered its
// request, completing the four-phase handshake (req up, ack up, req down,
// ack down). The address must be stable while `aer_req` is high. The 8-bit
// address and the four-phase protocol follow the processor description; the
// synchroniser is this implementation's choice. Each event reaches `ev_valid`
// three cycles after `aer_req` rises.
module aer_decoder #(
  parameter int unsigned ADDR_W = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              aer_req,
  input  logic [ADDR_W-1:0] aer_addr,
  output logic              aer_ack,
  output logic              ev_valid,
  output logic [ADDR_W-1:0] ev_addr
);
  logic req_s1, req_s2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      req_s1   <= 1'b0;
      req_s2   <= 1'b0;
      aer_ack  <= 1'b0;
      ev_valid <= 1'b0;
      ev_addr  <= '0;
    end else begin
      req_s1   <= aer_req;
      req_s2   <= req_s1;
      ev_valid <= 1'b0;
      if (req_s2 && !aer_ack) begin
        aer_ack  <= 1'b1;
        ev_valid <= 1'b1;
        ev_addr  <= aer_addr;
      end else if (!req_s2 && aer_ack) begin
        aer_ack  <= 1'b0;
      end
    end
  end
endmodule
