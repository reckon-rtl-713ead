// weight_update: on-chip learning step (modified stochastic e-prop).
//
// After a timestep with supervision, every weight moves by a product of a
// pre-synaptic eligibility trace (kept per neuron in the neuron memory) and
// post-synaptic terms (learning signal and surrogate derivative), so no
// per-synapse history is needed. The post-synaptic neurons are handled in
// blocks of 16, matching the 16 weights of one 128-bit memory word. For each
// block, two phases alternate:
//
//  Phase 1 (32 cycles, 2 per post-synaptic neuron j of the block):
//    read W_out word j (w_out[0..15][j]) and neuron word j/2; then
//    - learning signal LS_j = sat16( sum_k w_out[k][j] * err[k] >>> 7 )
//      from the 16 weights before their update (16 multipliers, "MAC array"),
//    - STE_j = ste_lut(u_j), and tr_rec_j kept for the regularizer,
//    - w_out[k][j] += stoch( err[k] * tr_out_j, lr_out ) for all k, skipped
//      when tr_out_j = 0, and the word is written back.
//  Phase 2 (2N cycles, 2 per pre-synaptic index i = 0..N-1):
//    read W_inp and W_rec words (i, block) and neuron word i/2; then for each
//    of the 16 post-synaptic neurons j of the block
//      w_inp[j][i] += stoch( tr_inp_i * STE_j * LS_j + reg_j, lr_hid )
//      w_rec[j][i] += stoch( tr_rec_i * STE_j * LS_j + reg_j, lr_hid )
//    each skipped when STE_j = 0 or the trace is 0, and both words are written.
//
// Total: ceil(N/16) * (32 + 2N) cycles, i.e. N(N+16)/8 for N a multiple of 16,
// plus two cycles to start and finish. The two-phase flow, the blocking by
// 16, the cycle count, the skipping conditions, the 16x5-bit STE, 16x16-bit
// LS and 16x12-bit trace buffers and the 32-bit product before the
// stochastic update follow the processor description. The >>>7 scaling of
// LS (weights read as fractions of 128), the regularizer form
// reg_j = -((tr_rec_j - reg_thr) << reg_sh) when tr_rec_j > reg_thr (and
// reg_en), and the learning-rate shifts are this implementation's choices.
// Post-synaptic neurons at or beyond N are never changed. Sparsity saves
// memory writes, not cycles: a W_out word is not written when tr_out_j = 0,
// and a W_inp or W_rec word is not written when all 16 of its updates are
// skipped. `upd_n` and `skip_n` count the applied and skipped input and
// recurrent updates of each phase-2 write cycle, so the update rate can be
// measured. Bit 8 of the W_out addresses is constant 0: the upper half of
// the 8 kB W_out memory is not used by the learning rule.
//
// Memory addressing: W_inp/W_rec word i*16 + j/16 holds the weights from
// input/neuron i to neurons j..j+15 (byte j%16); W_out word j holds the
// 16 weights from neuron j to the outputs (byte k). All reads return data one
// cycle later.
module weight_update
  import reckon_pkg::*;
(
  input  logic                           clk,
  input  logic                           rst_n,
  input  cfg_t                           cfg,
  input  logic                           start,
  output logic                           busy,
  output logic                           done,
  input  logic signed [N_OUT-1:0][Y_W-1:0] err,
  // neuron memory (read only)
  output logic                           nr_re,
  output logic [6:0]                     nr_raddr,
  input  nword_t                         nr_rdata,
  // output weights
  output logic                           wo_re,
  output logic [8:0]                     wo_raddr,
  input  logic [WORD_W-1:0]              wo_rdata,
  output logic                           wo_we,
  output logic [8:0]                     wo_waddr,
  output logic [WORD_W-1:0]              wo_wdata,
  // input and recurrent weights
  output logic                           wh_re,
  output logic [11:0]                    wh_raddr,
  input  logic [WORD_W-1:0]              wi_rdata,
  input  logic [WORD_W-1:0]              wr_rdata,
  output logic                           wi_we,
  output logic                           wr_we,
  output logic [11:0]                    wh_waddr,
  output logic [WORD_W-1:0]              wi_wdata,
  output logic [WORD_W-1:0]              wr_wdata,
  // statistics: input/recurrent weight updates applied and skipped this cycle
  output logic [5:0]                     upd_n,
  output logic [5:0]                     skip_n
);
  typedef enum logic [2:0] {S_IDLE, S_P1R, S_P1W, S_P2R, S_P2W, S_DONE} st_e;
  st_e st;

  logic [3:0]  jb;        // block of 16 post-synaptic neurons
  logic [3:0]  jj;        // neuron within the block (phase 1)
  logic [7:0]  ii;        // pre-synaptic index (phase 2)
  logic [4:0]  nblk;      // number of blocks
  logic [8:0]  nn;

  logic signed [15:0]      ls_rf  [16];
  logic signed [STE_W-1:0] ste_rf [16];
  logic [TRR_W-1:0]        trg_rf [16];

  logic [15:0] rnd;
  prng #(.SEED(16'h1D2B)) u_prng (.clk, .rst_n, .en(1'b1), .rnd);

  assign nn   = (cfg.n_neur == 0) ? 9'd1 : (cfg.n_neur > 9'd256 ? 9'd256 : cfg.n_neur);
  assign nblk = 5'((nn + 9'd15) >> 4);
  assign busy = (st != S_IDLE);

  // ---------------- phase 1 datapath ----------------
  logic [7:0]       j_abs;
  neuron_t          nj;
  logic signed [STE_W-1:0] ste_j;
  logic signed [31:0] ls_sum;
  logic signed [15:0] ls_j;
  logic [WORD_W-1:0]  wo_new;
  logic               j_valid;

  assign j_abs   = {jb, jj};
  assign j_valid = (9'(j_abs) < nn);
  assign nj      = j_abs[0] ? nr_rdata.n1 : nr_rdata.n0;

  ste_lut u_ste (.u(nj.u), .bp(cfg.ste_bp), .val(cfg.ste_val), .ste(ste_j));

  always_comb begin
    ls_sum = '0;
    for (int k = 0; k < N_OUT; k++)
      ls_sum += 32'($signed(wo_rdata[k*8 +: 8])) * 32'($signed(err[k]));
    ls_j = 16'(sat_s(48'(ls_sum >>> 7), 16));
  end

  for (genvar k = 0; k < N_OUT; k++) begin : g_wout
    logic signed [31:0] d;
    logic signed [7:0]  wn;
    assign d = 32'($signed(err[k])) * $signed({22'd0, nj.tr_out});
    stoch_update u_su (.delta(d), .lr_shift(cfg.lr_out), .rnd(rotl16(rnd, k) ^ 16'(k*16'h9E37)),
                       .w(wo_rdata[k*8 +: 8]), .w_new(wn));
    assign wo_new[k*8 +: 8] = (nj.tr_out != 0) ? wn : wo_rdata[k*8 +: 8];
  end

  // ---------------- phase 2 datapath ----------------
  neuron_t ni;
  assign ni = ii[0] ? nr_rdata.n1 : nr_rdata.n0;

  logic [WORD_W-1:0] wi_new, wr_new;
  logic [15:0]       skip_i, skip_r, en_i_v, en_r_v;
  for (genvar q = 0; q < 16; q++) begin : g_hid
    logic signed [33:0] post;   // STE_j * LS_j
    logic signed [33:0] reg_t;
    logic signed [47:0] di_w, dr_w;
    logic signed [31:0] di, dr;
    logic signed [7:0]  wi_n, wr_n;
    logic               en_i, en_r, jq_valid;
    assign jq_valid = (9'({jb, 4'(q)}) < nn);
    assign post  = 34'(ste_rf[q]) * 34'(ls_rf[q]);
    assign reg_t = (cfg.reg_en && trg_rf[q] > cfg.reg_thr)
                   ? -(34'(trg_rf[q] - cfg.reg_thr) <<< cfg.reg_sh) : 34'sd0;
    assign di_w  = 48'(post) * $signed({36'd0, ni.tr_inp}) + 48'(reg_t);
    assign dr_w  = 48'(post) * $signed({36'd0, ni.tr_rec}) + 48'(reg_t);
    assign di    = sat_s(di_w, 32);
    assign dr    = sat_s(dr_w, 32);
    assign en_i  = jq_valid && (ste_rf[q] != 0) && (ni.tr_inp != 0);
    assign en_r  = jq_valid && (ste_rf[q] != 0) && (ni.tr_rec != 0);
    stoch_update u_si (.delta(di), .lr_shift(cfg.lr_hid), .rnd(rotl16(rnd, q + 1)),
                       .w(wi_rdata[q*8 +: 8]), .w_new(wi_n));
    stoch_update u_sr (.delta(dr), .lr_shift(cfg.lr_hid), .rnd(rotl16(rnd, 15 - q) ^ 16'h5A5A),
                       .w(wr_rdata[q*8 +: 8]), .w_new(wr_n));
    assign wi_new[q*8 +: 8] = en_i ? wi_n : wi_rdata[q*8 +: 8];
    assign wr_new[q*8 +: 8] = en_r ? wr_n : wr_rdata[q*8 +: 8];
    assign en_i_v[q] = en_i;
    assign en_r_v[q] = en_r;
    assign skip_i[q] = jq_valid && !en_i;
    assign skip_r[q] = jq_valid && !en_r;
  end

  // ---------------- sequencing ----------------
  always_comb begin
    nr_re = 1'b0; nr_raddr = '0;
    wo_re = 1'b0; wo_raddr = '0; wo_we = 1'b0; wo_waddr = '0; wo_wdata = wo_new;
    wh_re = 1'b0; wh_raddr = '0; wi_we = 1'b0; wr_we = 1'b0; wh_waddr = '0;
    wi_wdata = wi_new; wr_wdata = wr_new;
    upd_n = '0; skip_n = '0;
    case (st)
      S_P1R: begin
        nr_re = 1'b1; nr_raddr = j_abs[7:1];
        wo_re = 1'b1; wo_raddr = {1'b0, j_abs};
      end
      S_P1W: begin
        wo_we = j_valid && (nj.tr_out != 0); wo_waddr = {1'b0, j_abs};
      end
      S_P2R: begin
        nr_re = 1'b1; nr_raddr = ii[7:1];
        wh_re = 1'b1; wh_raddr = {ii, jb};
      end
      S_P2W: begin
        wi_we = (en_i_v != 0); wr_we = (en_r_v != 0); wh_waddr = {ii, jb};
        upd_n  = 6'($countones(en_i_v)) + 6'($countones(en_r_v));
        skip_n = 6'($countones(skip_i)) + 6'($countones(skip_r));
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; jb <= '0; jj <= '0; ii <= '0; done <= 1'b0;
      for (int q = 0; q < 16; q++) begin
        ls_rf[q] <= '0; ste_rf[q] <= '0; trg_rf[q] <= '0;
      end
    end else begin
      done <= 1'b0;
      case (st)
        S_IDLE: if (start) begin st <= S_P1R; jb <= '0; jj <= '0; end
        S_P1R: st <= S_P1W;
        S_P1W: begin
          ls_rf[jj]  <= j_valid ? ls_j  : 16'sd0;
          ste_rf[jj] <= j_valid ? ste_j : '0;
          trg_rf[jj] <= nj.tr_rec;
          jj <= jj + 4'd1;
          if (jj == 4'd15) begin st <= S_P2R; ii <= '0; end
          else st <= S_P1R;
        end
        S_P2R: st <= S_P2W;
        S_P2W: begin
          if (9'(ii) == nn - 9'd1) begin
            if (5'(jb) == nblk - 5'd1) st <= S_DONE;
            else begin st <= S_P1R; jb <= jb + 4'd1; jj <= '0; end
          end else begin
            ii <= ii + 8'd1;
            st <= S_P2R;
          end
        end
        S_DONE: begin done <= 1'b1; st <= S_IDLE; end
        default: st <= S_IDLE;
      endcase
    end
  end

  // The controller must not start a new update while one is running.
  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> st == S_IDLE);
endmodule
