// param_bank: configuration registers of the processor.
//
// Thirty-two 16-bit registers written and read through the configuration
// interface, and their decoded view `cfg` used by the datapaths. The
// processor description names this block only; the register map below is
// this implementation's. Writes take effect at the next clock edge; reads are
// combinational. Unused register bits read back as written.
//
//   0  n_neur[8:0]   enabled hidden neurons (1..256)
//   1  n_out[4:0]    enabled output neurons (1..16)
//   2  {sh_out, sh_rec, sh_inp}     weight shifts, 4 bits each
//   3  {inc_out, inc_rec, inc_inp}  trace increment shifts, 4 bits each
//   4  kappa[7:0]    output leak factor, value kappa/256
//   5  {reg_en, learn_en, class_mode, sig_en, noise_en}
//   6  noise_sh      7  lr_out      8  lr_hid
//   9  reg_thr       10 reg_sh
//   11..14 STE breakpoints 0..3 (signed)
//   15 {val2, val1, val0}  16 {val4, val3}  STE segment values (5-bit signed)
//   17 out_sel       output shown on the decision port in regression mode
module param_bank
  import reckon_pkg::*;
#(
  parameter int unsigned N_REGS = 32,
  localparam int unsigned AW = $clog2(N_REGS)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          we,
  input  logic [AW-1:0] addr,
  input  logic [15:0]   wdata,
  output logic [15:0]   rdata,
  output cfg_t          cfg
);
  logic [15:0] regs [N_REGS];

  function automatic logic [15:0] reset_value(input int a);
    case (a)
      0:  return 16'd256;
      1:  return 16'd16;
      2:  return 16'h0444;
      3:  return 16'h0566;
      4:  return 16'd243;
      7:  return 16'd8;
      8:  return 16'd12;
      9:  return 16'd2048;
      11: return 16'hFE00;   // -512
      12: return 16'hFF00;   // -256
      13: return 16'h0100;   //  256
      14: return 16'h0200;   //  512
      15: return {1'b0, 5'd8, 5'd4, 5'd0};
      16: return {6'd0, 5'd0, 5'd4};
      default: return 16'd0;
    endcase
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int a = 0; a < N_REGS; a++) regs[a] <= reset_value(a);
    end else if (we) begin
      regs[addr] <= wdata;
    end
  end

  assign rdata = regs[addr];

  always_comb begin
    cfg.n_neur     = regs[0][8:0];
    cfg.n_out      = regs[1][4:0];
    cfg.sh_inp     = regs[2][3:0];
    cfg.sh_rec     = regs[2][7:4];
    cfg.sh_out     = regs[2][11:8];
    cfg.inc_inp    = regs[3][3:0];
    cfg.inc_rec    = regs[3][7:4];
    cfg.inc_out    = regs[3][11:8];
    cfg.kappa      = regs[4][7:0];
    cfg.noise_en   = regs[5][0];
    cfg.sig_en     = regs[5][1];
    cfg.class_mode = regs[5][2];
    cfg.learn_en   = regs[5][3];
    cfg.reg_en     = regs[5][4];
    cfg.noise_sh   = regs[6][3:0];
    cfg.lr_out     = regs[7][4:0];
    cfg.lr_hid     = regs[8][4:0];
    cfg.reg_thr    = regs[9][TRR_W-1:0];
    cfg.reg_sh     = regs[10][3:0];
    for (int b = 0; b < 4; b++) cfg.ste_bp[b] = regs[11+b];
    cfg.ste_val[0] = regs[15][4:0];
    cfg.ste_val[1] = regs[15][9:5];
    cfg.ste_val[2] = regs[15][14:10];
    cfg.ste_val[3] = regs[16][4:0];
    cfg.ste_val[4] = regs[16][9:5];
    cfg.out_sel    = regs[17][3:0];
  end
endmodule
