// reckon_top: spiking recurrent neural network processor with on-chip learning.
//
// Up to 256 input channels feed up to 256 leaky integrate-and-fire neurons
// with all-to-all input and recurrent 8-bit weights, read out by up to 16
// leaky-integrator outputs. Learning uses eligibility traces stored per
// neuron (modified e-prop), so the network can learn dependencies spanning
// thousands of timesteps without storing the activity history.
//
// Structure:
//   aer_decoder  -> x sparsity map (next step)       address events in
//   controller   -> neuron datapath (2 x lif_neuron), z sparsity map, outputs
//   li_output    -> decision / y                     results out
//   loss         -> errors y* - y                    targets in
//   weight_update-> W_out, W_inp, W_rec              learning
//   spi_slave, param_bank                            configuration, monitoring
//   4 x sram_1r1w: W_inp 64 kB, W_rec 64 kB, W_out 8 kB, neuron states 2 kB
//
// Memory ports are shared: the configuration bus may access them only while
// the processor is idle (`busy` low; otherwise writes are dropped and reads
// return 0); during a timestep the controller owns them, and during learning
// the weight-update block does. A timestep starts on a `step_req` pulse; the
// outputs are valid when `busy` falls. `sup_valid` (sampled at the end of the
// forward pass) selects whether the step also learns.
//
// Block boundaries, memory sizes and word width follow the processor
// description; the sharing scheme, pin list and bus are this
// implementation's choices.
module reckon_top
  import reckon_pkg::*;
(
  input  logic                          clk,
  input  logic                          rst_n,
  // configuration and monitoring
  input  logic                          spi_sck,
  input  logic                          spi_cs_n,
  input  logic                          spi_mosi,
  output logic                          spi_miso,
  // address events
  input  logic                          aer_req,
  input  logic [7:0]                    aer_addr,
  output logic                          aer_ack,
  // timestep control
  input  logic                          step_req,
  input  logic                          sample_clr,
  output logic                          busy,
  output logic [14:0]                   timestep,
  // supervision
  input  logic                          sup_valid,
  input  logic                          tgt_we,
  input  logic [3:0]                    tgt_idx,
  input  logic signed [Y_W-1:0]         tgt_val,
  // results
  output logic [15:0]                   decision,
  output logic signed [N_OUT-1:0][Y_W-1:0] y_out,
  // monitoring strobes
  output logic                          mon_syn,
  output logic                          mon_spk,
  output logic [5:0]                    mon_upd,
  output logic [5:0]                    mon_skip
);
  cfg_t cfg;

  // ---------------- configuration bus ----------------
  logic        b_req, b_we, b_rvalid;
  tgt_e        b_tgt;
  logic [19:0] b_addr;
  logic [15:0] b_wdata, b_rdata, pb_rdata;
  logic        idle;

  spi_slave u_spi (
    .clk, .rst_n, .sck(spi_sck), .cs_n(spi_cs_n), .mosi(spi_mosi), .miso(spi_miso),
    .req(b_req), .req_we(b_we), .req_tgt(b_tgt), .req_addr(b_addr), .req_wdata(b_wdata),
    .rvalid(b_rvalid), .rdata(b_rdata));

  param_bank u_pb (
    .clk, .rst_n, .we(b_req && b_we && b_tgt == TGT_PARAM && idle),
    .addr(b_addr[4:0]), .wdata(b_wdata), .rdata(pb_rdata), .cfg);

  // ---------------- activity maps ----------------
  logic             ev_valid;
  logic [7:0]       ev_addr;
  logic [N_MAX-1:0] x_cur, z_cur, x_nxt, z_nxt;
  logic             map_swap, map_clr, z_set;
  logic [7:0]       z_set_idx;

  aer_decoder u_aer (.clk, .rst_n, .aer_req, .aer_addr, .aer_ack, .ev_valid, .ev_addr);

  sparsity_map u_xmap (.clk, .rst_n, .set_en(ev_valid), .set_idx(ev_addr), .swap(map_swap),
                       .clear(map_clr), .cur(x_cur), .nxt(x_nxt));
  sparsity_map u_zmap (.clk, .rst_n, .set_en(z_set), .set_idx(z_set_idx), .swap(map_swap),
                       .clear(map_clr), .cur(z_cur), .nxt(z_nxt));

  // ---------------- memories ----------------
  logic              nr_re, nr_we;   logic [6:0]  nr_raddr, nr_waddr;
  logic [15:0]       nr_wbe;         logic [127:0] nr_rdata, nr_wdata;
  logic              wi_re, wi_we;   logic [11:0] wi_raddr, wi_waddr;
  logic [15:0]       wi_wbe;         logic [127:0] wi_rdata, wi_wdata;
  logic              wr_re, wr_we;   logic [11:0] wr_raddr, wr_waddr;
  logic [15:0]       wr_wbe;         logic [127:0] wr_rdata, wr_wdata;
  logic              wo_re, wo_we;   logic [8:0]  wo_raddr, wo_waddr;
  logic [15:0]       wo_wbe;         logic [127:0] wo_rdata, wo_wdata;

  sram_1r1w #(.DEPTH(4096), .WIDTH(128)) u_winp (.clk, .re(wi_re), .raddr(wi_raddr), .rdata(wi_rdata),
                                                  .we(wi_we), .waddr(wi_waddr), .wbe(wi_wbe), .wdata(wi_wdata));
  sram_1r1w #(.DEPTH(4096), .WIDTH(128)) u_wrec (.clk, .re(wr_re), .raddr(wr_raddr), .rdata(wr_rdata),
                                                  .we(wr_we), .waddr(wr_waddr), .wbe(wr_wbe), .wdata(wr_wdata));
  sram_1r1w #(.DEPTH(512), .WIDTH(128))  u_wout (.clk, .re(wo_re), .raddr(wo_raddr), .rdata(wo_rdata),
                                                  .we(wo_we), .waddr(wo_waddr), .wbe(wo_wbe), .wdata(wo_wdata));
  sram_1r1w #(.DEPTH(128), .WIDTH(128))  u_neur (.clk, .re(nr_re), .raddr(nr_raddr), .rdata(nr_rdata),
                                                  .we(nr_we), .waddr(nr_waddr), .wbe(nr_wbe), .wdata(nr_wdata));

  // ---------------- controller and output layer ----------------
  logic        c_nr_re, c_nr_we, c_wh_re, c_wo_re;
  logic [6:0]  c_nr_raddr, c_nr_waddr;
  nword_t      c_nr_wdata;
  logic [11:0] c_wh_raddr;
  logic [8:0]  c_wo_raddr;
  logic        li_clr, li_int, li_dec, li_acc, wu_start, wu_done, wu_busy;
  logic [15:0] li_rnd;
  logic signed [N_OUT-1:0][Y_W-1:0] y, y_act, err;
  logic signed [N_OUT-1:0][31:0]    y_sum;

  controller u_ctrl (
    .clk, .rst_n, .cfg, .step_req, .sample_clr, .sup_valid, .busy, .timestep,
    .x_cur, .z_cur, .map_swap, .map_clr, .z_set, .z_set_idx,
    .nr_re(c_nr_re), .nr_raddr(c_nr_raddr), .nr_rdata(nword_t'(nr_rdata)),
    .nr_we(c_nr_we), .nr_waddr(c_nr_waddr), .nr_wdata(c_nr_wdata),
    .wh_re(c_wh_re), .wh_raddr(c_wh_raddr), .wi_rdata, .wr_rdata,
    .wo_re(c_wo_re), .wo_raddr(c_wo_raddr),
    .li_clr, .li_int, .li_dec, .li_acc, .wu_start, .wu_done, .ev_syn(mon_syn), .ev_spk(mon_spk));

  prng #(.SEED(16'h7E57)) u_prng_out (.clk, .rst_n, .en(1'b1), .rnd(li_rnd));

  li_output u_li (.clk, .rst_n, .clr(li_clr), .int_en(li_int), .w_word(wo_rdata), .dec_en(li_dec),
                  .acc_en(li_acc), .rnd(li_rnd), .cfg, .y, .y_act, .y_sum, .decision);
  assign y_out = y_act;

  // ---------------- loss and learning ----------------
  loss u_loss (.clk, .rst_n, .tgt_we, .tgt_idx, .tgt_val, .n_out(cfg.n_out), .y(y_act), .err);

  logic        u_nr_re, u_wo_re, u_wo_we, u_wh_re, u_wi_we, u_wr_we;
  logic [6:0]  u_nr_raddr;
  logic [8:0]  u_wo_raddr, u_wo_waddr;
  logic [11:0] u_wh_raddr, u_wh_waddr;
  logic [127:0] u_wo_wdata, u_wi_wdata, u_wr_wdata;

  weight_update u_wu (
    .clk, .rst_n, .cfg, .start(wu_start), .busy(wu_busy), .done(wu_done), .err,
    .nr_re(u_nr_re), .nr_raddr(u_nr_raddr), .nr_rdata(nword_t'(nr_rdata)),
    .wo_re(u_wo_re), .wo_raddr(u_wo_raddr), .wo_rdata, .wo_we(u_wo_we), .wo_waddr(u_wo_waddr), .wo_wdata(u_wo_wdata),
    .wh_re(u_wh_re), .wh_raddr(u_wh_raddr), .wi_rdata, .wr_rdata,
    .wi_we(u_wi_we), .wr_we(u_wr_we), .wh_waddr(u_wh_waddr), .wi_wdata(u_wi_wdata), .wr_wdata(u_wr_wdata),
    .upd_n(mon_upd), .skip_n(mon_skip));

  // ---------------- memory port sharing ----------------
  assign idle = !busy;
  logic        bus_mem;          // configuration access to a memory this cycle
  logic [15:0] bus_wbe;
  logic [127:0] bus_wdata;
  assign bus_mem   = b_req && idle;
  assign bus_wbe   = 16'd1 << b_addr[3:0];
  assign bus_wdata = {16{b_wdata[7:0]}};

  always_comb begin
    // neuron memory
    if (wu_busy) begin
      nr_re = u_nr_re; nr_raddr = u_nr_raddr; nr_we = 1'b0; nr_waddr = '0; nr_wbe = '1; nr_wdata = '0;
    end else if (busy) begin
      nr_re = c_nr_re; nr_raddr = c_nr_raddr; nr_we = c_nr_we; nr_waddr = c_nr_waddr;
      nr_wbe = '1; nr_wdata = c_nr_wdata;
    end else begin
      nr_re = bus_mem && !b_we && b_tgt == TGT_NEUR; nr_raddr = b_addr[10:4];
      nr_we = bus_mem && b_we && b_tgt == TGT_NEUR;  nr_waddr = b_addr[10:4];
      nr_wbe = bus_wbe; nr_wdata = bus_wdata;
    end
    // input and recurrent weights
    if (wu_busy) begin
      wi_re = u_wh_re; wi_raddr = u_wh_raddr; wi_we = u_wi_we; wi_waddr = u_wh_waddr; wi_wbe = '1; wi_wdata = u_wi_wdata;
      wr_re = u_wh_re; wr_raddr = u_wh_raddr; wr_we = u_wr_we; wr_waddr = u_wh_waddr; wr_wbe = '1; wr_wdata = u_wr_wdata;
    end else if (busy) begin
      wi_re = c_wh_re; wi_raddr = c_wh_raddr; wi_we = 1'b0; wi_waddr = '0; wi_wbe = '0; wi_wdata = '0;
      wr_re = c_wh_re; wr_raddr = c_wh_raddr; wr_we = 1'b0; wr_waddr = '0; wr_wbe = '0; wr_wdata = '0;
    end else begin
      wi_re = bus_mem && !b_we && b_tgt == TGT_WINP; wi_raddr = b_addr[15:4];
      wi_we = bus_mem && b_we && b_tgt == TGT_WINP;  wi_waddr = b_addr[15:4];
      wi_wbe = bus_wbe; wi_wdata = bus_wdata;
      wr_re = bus_mem && !b_we && b_tgt == TGT_WREC; wr_raddr = b_addr[15:4];
      wr_we = bus_mem && b_we && b_tgt == TGT_WREC;  wr_waddr = b_addr[15:4];
      wr_wbe = bus_wbe; wr_wdata = bus_wdata;
    end
    // output weights
    if (wu_busy) begin
      wo_re = u_wo_re; wo_raddr = u_wo_raddr; wo_we = u_wo_we; wo_waddr = u_wo_waddr; wo_wbe = '1; wo_wdata = u_wo_wdata;
    end else if (busy) begin
      wo_re = c_wo_re; wo_raddr = c_wo_raddr; wo_we = 1'b0; wo_waddr = '0; wo_wbe = '0; wo_wdata = '0;
    end else begin
      wo_re = bus_mem && !b_we && b_tgt == TGT_WOUT; wo_raddr = b_addr[12:4];
      wo_we = bus_mem && b_we && b_tgt == TGT_WOUT;  wo_waddr = b_addr[12:4];
      wo_wbe = bus_wbe; wo_wdata = bus_wdata;
    end
  end

  // Configuration reads: memories answer one cycle after the request, the
  // byte is selected and returned in the cycle after that.
  logic       rd_pend;
  tgt_e       rd_tgt;
  logic [3:0] rd_byte;
  logic       rd_ok;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_pend <= 1'b0; rd_tgt <= TGT_PARAM; rd_byte <= '0; rd_ok <= 1'b0;
      b_rvalid <= 1'b0; b_rdata <= '0;
    end else begin
      rd_pend  <= b_req && !b_we;
      b_rvalid <= rd_pend;
      if (b_req && !b_we) begin
        rd_tgt <= b_tgt; rd_byte <= b_addr[3:0]; rd_ok <= idle;
        if (b_tgt == TGT_PARAM) b_rdata <= idle ? pb_rdata : 16'd0;
        if (b_tgt == TGT_Y)
          case (b_addr[5:4])
            2'd1:    b_rdata <= y_sum[b_addr[3:0]][15:0];
            2'd2:    b_rdata <= y_sum[b_addr[3:0]][31:16];
            default: b_rdata <= y_act[b_addr[3:0]];
          endcase
      end
      if (rd_pend && rd_ok) begin
        case (rd_tgt)
          TGT_WINP: b_rdata <= {8'd0, wi_rdata[rd_byte*8 +: 8]};
          TGT_WREC: b_rdata <= {8'd0, wr_rdata[rd_byte*8 +: 8]};
          TGT_WOUT: b_rdata <= {8'd0, wo_rdata[rd_byte*8 +: 8]};
          TGT_NEUR: b_rdata <= {8'd0, nr_rdata[rd_byte*8 +: 8]};
          default: ;
        endcase
      end else if (rd_pend && !rd_ok && rd_tgt != TGT_Y) begin
        b_rdata <= 16'd0;
      end
    end
  end
endmodule
