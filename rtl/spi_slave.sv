// spi_slave: serial configuration and monitoring port.
//
// SPI mode 0 (data sampled on the rising edge of sck, changed on the falling
// edge), most significant bit first, one 40-bit frame per cs_n low period:
//
//   bit 39     rw       1 = write, 0 = read
//   bits 38:36 target   0 parameter bank, 1 W_inp, 2 W_rec, 3 W_out,
//                       4 neuron memory, 5 output values y (read only)
//   bits 35:16 address  register index or byte address in the memory
//   bits 15:0  data     write data; on a read, the data returned
//
// sck, cs_n and mosi are sampled by the system clock through two-flip-flop
// synchronisers, so sck must be at most clk/8. After the 24th bit of a read
// the block issues a bus read (`req`, `req_we` = 0); the bus answers with
// `rvalid`/`rdata` within 3 cycles and the 16 bits are shifted out on miso
// during the data phase. After the 40th bit of a write it issues a bus write.
// The processor description only names an SPI block for configuration and
// monitoring; the frame format and bus are this implementation's choices.
module spi_slave
  import reckon_pkg::*;
#(
  parameter int unsigned FRAME_W = 40
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        sck,
  input  logic        cs_n,
  input  logic        mosi,
  output logic        miso,
  output logic        req,
  output logic        req_we,
  output tgt_e        req_tgt,
  output logic [19:0] req_addr,
  output logic [15:0] req_wdata,
  input  logic        rvalid,
  input  logic [15:0] rdata
);
  logic [2:0] sck_s;
  logic [1:0] cs_s;
  logic [1:0] mosi_s;
  logic [FRAME_W-1:0] sh_in;
  logic [5:0]  nbits;
  logic [15:0] sh_out;
  logic        rise, fall, active;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sck_s <= '0; cs_s <= '1; mosi_s <= '0;
    end else begin
      sck_s  <= {sck_s[1:0], sck};
      cs_s   <= {cs_s[0], cs_n};
      mosi_s <= {mosi_s[0], mosi};
    end
  end
  assign active = !cs_s[1];
  assign rise   = active && sck_s[1] && !sck_s[2];
  assign fall   = active && !sck_s[1] && sck_s[2];

  logic [FRAME_W-1:0] frame;
  assign frame = {sh_in[FRAME_W-2:0], mosi_s[1]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sh_in <= '0; nbits <= '0; sh_out <= '0;
      req <= 1'b0; req_we <= 1'b0; req_tgt <= TGT_PARAM; req_addr <= '0; req_wdata <= '0;
    end else begin
      req <= 1'b0;
      if (!active) begin
        nbits <= '0;
      end else if (rise) begin
        sh_in <= frame;
        nbits <= nbits + 6'd1;
        if (nbits == 6'd23 && !frame[23]) begin
          req <= 1'b1; req_we <= 1'b0;
          req_tgt <= tgt_e'(frame[22:20]); req_addr <= frame[19:0];
        end
        if (nbits == 6'(FRAME_W-1) && frame[FRAME_W-1]) begin
          req <= 1'b1; req_we <= 1'b1;
          req_tgt <= tgt_e'(frame[38:36]); req_addr <= frame[35:16]; req_wdata <= frame[15:0];
        end
      end else if (fall && nbits > 6'd24) begin
        sh_out <= {sh_out[14:0], 1'b0};
      end
      if (rvalid) sh_out <= rdata;
    end
  end
  assign miso = sh_out[15];
endmodule
