// controller: timestep sequencer of the spiking recurrent network.
//
// The network is computed one timestep at a time. A pulse on `step_req`
// (remembered if it arrives while busy) starts a timestep:
//
//  1. SWAP   (1 cycle): the input map x and recurrent map z collected during
//            the previous step become the current maps.
//  2. INTEG  (1 + N(1+S) cycles, S = number of set bits of x|z): for each
//            hidden neuron j < N, one cycle to add the noise term and the trace
//            increments, then one cycle per active index i of x|z, in which the
//            W_inp and W_rec words (i, j/16) read in the previous cycle are
//            added (w_inp if x[i], w_rec if z[i]). Only non-zero map entries
//            cost cycles. The leading cycle fetches the first neuron word.
//            At the end of this pass the timestep counter advances.
//  3. FIRE   (1 + N cycles, +1 to drain): each neuron tests u - theta > 0,
//            resets by subtraction, sets its bit in the next z map, and decays
//            u and its traces with stochastic rounding. For a spiking neuron the
//            W_out word j is read and added to the 16 outputs in the next cycle.
//            The leading cycle also decays the outputs by kappa, and the
//            drain cycle adds the final outputs to their running sums.
//  4. LEARN  (optional): when learning is enabled and `sup_valid` is high the
//            weight-update block runs; the controller waits for its `done`.
//
// Two neurons share a 128-bit neuron-memory word, so the word is read once
// per pair, held in a register while the even and the odd neuron are
// processed by the two lif_neuron instances, and written back after the odd
// one (or after the last neuron when N is odd). Reads and writes of the
// neuron memory use its separate read and write ports in the same cycle.
//
// A pulse on `sample_clr` (when idle) clears u and all traces of every
// neuron (thresholds and leaks kept), both activity maps and the outputs,
// and restarts the timestep counter: N/2 + 1 cycles.
//
// The pass structure and the cycle counts N(1 + sum(x|z)) and N follow the
// processor description (plus one prefetch cycle per pass, this
// implementation's). The 15-bit saturating timestep counter follows the
// 32k-step training timespan. The clear pass, step-request queueing and the
// moment of output decay are this implementation's choices.
module controller
  import reckon_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  cfg_t                 cfg,
  input  logic                 step_req,
  input  logic                 sample_clr,
  input  logic                 sup_valid,
  output logic                 busy,
  output logic [14:0]          timestep,
  // activity maps
  input  logic [N_MAX-1:0]     x_cur,
  input  logic [N_MAX-1:0]     z_cur,
  output logic                 map_swap,
  output logic                 map_clr,
  output logic                 z_set,
  output logic [7:0]           z_set_idx,
  // neuron memory
  output logic                 nr_re,
  output logic [6:0]           nr_raddr,
  input  nword_t               nr_rdata,
  output logic                 nr_we,
  output logic [6:0]           nr_waddr,
  output nword_t               nr_wdata,
  // input / recurrent weights (read only here)
  output logic                 wh_re,
  output logic [11:0]          wh_raddr,
  input  logic [WORD_W-1:0]    wi_rdata,
  input  logic [WORD_W-1:0]    wr_rdata,
  // output weights (read only here) and output layer control
  output logic                 wo_re,
  output logic [8:0]           wo_raddr,
  output logic                 li_clr,
  output logic                 li_int,
  output logic                 li_dec,
  output logic                 li_acc,
  // weight update
  output logic                 wu_start,
  input  logic                 wu_done,
  // event counters for monitoring: activity entries processed, spikes
  output logic                 ev_syn,
  output logic                 ev_spk
);
  typedef enum logic [3:0] {
    C_IDLE, C_CLR0, C_CLR, C_SWAP, C_IPRE, C_INT, C_FPRE, C_FIRE, C_FTAIL, C_LSTART, C_LWAIT
  } cst_e;
  cst_e st;

  logic [8:0]  j;          // neuron index (9 bits so N = 256 fits)
  logic        k0;         // first cycle of a neuron in INTEG
  logic [7:0]  last_i;     // active index whose weights arrive this cycle
  nword_t      wreg;       // held neuron word
  neuron_t     nacc;       // partially integrated neuron
  logic        step_pend;
  logic        wo_pend;    // a W_out word read last cycle must be added to the outputs
  logic [8:0]  nn;

  logic [15:0] rnd;
  prng #(.SEED(16'hACE1)) u_prng (.clk, .rst_n, .en(1'b1), .rnd);

  assign nn   = (cfg.n_neur == 0) ? 9'd1 : (cfg.n_neur > 9'd256 ? 9'd256 : cfg.n_neur);
  assign busy = (st != C_IDLE) || step_pend;

  // ---------------- active-index search ----------------
  logic [N_MAX-1:0] xz;
  logic [8:0]       srch_start;
  logic             srch_found;
  logic [7:0]       srch_idx;
  assign xz         = x_cur | z_cur;
  assign srch_start = k0 ? 9'd0 : 9'(last_i) + 9'd1;
  first_set #(.N(N_MAX)) u_fs (.vec(xz), .start(srch_start), .found(srch_found), .idx(srch_idx));

  // ---------------- neuron datapath ----------------
  nword_t  cur_word;
  neuron_t st_even, st_odd, s_in;
  neuron_t int0, int1, dec0, dec1, int_sel, dec_sel;
  logic    spk0, spk1, spk_sel;
  logic    first_of_pair;
  logic    in_int_k;   // weights of last_i arrive this cycle
  logic [7:0] jb;      // j as byte index

  assign jb            = j[7:0];
  assign first_of_pair = !j[0];
  // The word is taken from the memory on the first access to an even neuron.
  assign cur_word = (first_of_pair && ((st == C_INT && k0) || st == C_FIRE)) ? nr_rdata : wreg;
  assign st_even  = cur_word.n0;
  assign st_odd   = cur_word.n1;
  assign in_int_k = (st == C_INT) && !k0;
  assign s_in     = in_int_k ? nacc : (j[0] ? st_odd : st_even);

  logic signed [W_W-1:0] w_i, w_r;
  assign w_i = wi_rdata[j[3:0]*8 +: 8];
  assign w_r = wr_rdata[j[3:0]*8 +: 8];

  // Two instances: the even and the odd neuron of the held word.
  lif_neuron u_lif0 (
    .st_i(s_in), .theta(cur_word.theta), .alpha(cur_word.alpha), .kappa(cfg.kappa),
    .add_inp(in_int_k && x_cur[last_i]), .w_inp(w_i), .sh_inp(cfg.sh_inp),
    .add_rec(in_int_k && z_cur[last_i]), .w_rec(w_r), .sh_rec(cfg.sh_rec),
    .add_noise(!in_int_k && cfg.noise_en), .noise_sh(cfg.noise_sh),
    .inc_x(!in_int_k && x_cur[jb]), .inc_z(!in_int_k && z_cur[jb]),
    .inc_inp(cfg.inc_inp), .inc_rec(cfg.inc_rec), .inc_out(cfg.inc_out),
    .rnd(rnd), .st_int_o(int0), .st_dec_o(dec0), .spike_o(spk0));
  lif_neuron u_lif1 (
    .st_i(s_in), .theta(cur_word.theta), .alpha(cur_word.alpha), .kappa(cfg.kappa),
    .add_inp(in_int_k && x_cur[last_i]), .w_inp(w_i), .sh_inp(cfg.sh_inp),
    .add_rec(in_int_k && z_cur[last_i]), .w_rec(w_r), .sh_rec(cfg.sh_rec),
    .add_noise(!in_int_k && cfg.noise_en), .noise_sh(cfg.noise_sh),
    .inc_x(!in_int_k && x_cur[jb]), .inc_z(!in_int_k && z_cur[jb]),
    .inc_inp(cfg.inc_inp), .inc_rec(cfg.inc_rec), .inc_out(cfg.inc_out),
    .rnd(rotl16(rnd, 7)), .st_int_o(int1), .st_dec_o(dec1), .spike_o(spk1));
  assign int_sel = j[0] ? int1 : int0;
  assign dec_sel = j[0] ? dec1 : dec0;
  assign spk_sel = j[0] ? spk1 : spk0;

  // Word with neuron j replaced by `nst`.
  function automatic nword_t put(input nword_t w, input logic odd, input neuron_t nst);
    nword_t r;
    r = w;
    if (odd) r.n1 = nst; else r.n0 = nst;
    return r;
  endfunction

  logic int_final;      // last cycle of neuron j in INTEG
  logic last_neuron;
  assign int_final   = !srch_found;
  assign last_neuron = (j == nn - 9'd1);

  // ---------------- memory and control outputs ----------------
  always_comb begin
    nr_re = 1'b0; nr_raddr = '0; nr_we = 1'b0; nr_waddr = j[7:1]; nr_wdata = wreg;
    wh_re = 1'b0; wh_raddr = '0;
    wo_re = 1'b0; wo_raddr = {1'b0, jb};
    map_swap = 1'b0; map_clr = 1'b0; z_set = 1'b0; z_set_idx = jb;
    li_clr = 1'b0; li_int = 1'b0; li_dec = 1'b0; li_acc = 1'b0; wu_start = 1'b0;
    ev_syn = 1'b0; ev_spk = 1'b0;
    case (st)
      C_CLR0: begin
        nr_re = 1'b1; nr_raddr = 7'd0; map_clr = 1'b1; li_clr = 1'b1;
      end
      C_CLR: begin
        nr_we = 1'b1; nr_waddr = j[7:1];
        nr_wdata = nr_rdata;
        nr_wdata.n0 = '0; nr_wdata.n1 = '0;
        nr_re = 1'b1; nr_raddr = j[7:1] + 7'd1;
      end
      C_SWAP: map_swap = 1'b1;
      C_IPRE: begin nr_re = 1'b1; nr_raddr = 7'd0; end
      C_INT: begin
        if (srch_found) begin
          wh_re = 1'b1; wh_raddr = {srch_idx, jb[7:4]};
        end
        ev_syn = in_int_k;
        if (int_final) begin
          nr_wdata = put(cur_word, j[0], int_sel);
          nr_we    = j[0] || last_neuron;
          nr_waddr = j[7:1];
          if (j[0] && !last_neuron) begin nr_re = 1'b1; nr_raddr = j[7:1] + 7'd1; end
        end
      end
      C_FPRE: begin nr_re = 1'b1; nr_raddr = 7'd0; li_dec = 1'b1; end
      C_FIRE: begin
        nr_wdata = put(cur_word, j[0], dec_sel);
        nr_we    = j[0] || last_neuron;
        nr_waddr = j[7:1];
        if (j[0] && !last_neuron) begin nr_re = 1'b1; nr_raddr = j[7:1] + 7'd1; end
        if (spk_sel) begin
          z_set = 1'b1; wo_re = 1'b1; ev_spk = 1'b1;
        end
      end
      C_FTAIL:  li_acc = 1'b1;
      C_LSTART: wu_start = 1'b1;
      default: ;
    endcase
    if (st == C_FIRE || st == C_FTAIL) li_int = wo_pend;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= C_IDLE; j <= '0; k0 <= 1'b1; last_i <= '0; wreg <= '0; nacc <= '0;
      step_pend <= 1'b0; timestep <= '0; wo_pend <= 1'b0;
    end else begin
      if (step_req) step_pend <= 1'b1;
      wo_pend <= (st == C_FIRE) && spk_sel;
      case (st)
        C_IDLE: begin
          if (sample_clr) begin
            st <= C_CLR0; timestep <= '0;
          end else if (step_pend || step_req) begin
            step_pend <= 1'b0; st <= C_SWAP;
          end
        end
        C_CLR0: begin st <= C_CLR; j <= '0; end
        C_CLR: begin
          // j counts words here (in steps of two neurons)
          if (j[7:1] == 7'((nn - 9'd1) >> 1)) st <= C_IDLE;
          j <= j + 9'd2;
        end
        C_SWAP: st <= C_IPRE;
        C_IPRE: begin st <= C_INT; j <= '0; k0 <= 1'b1; end
        C_INT: begin
          if (k0) wreg <= cur_word;
          if (srch_found) begin
            k0     <= 1'b0;
            last_i <= srch_idx;
            nacc   <= int_sel;
          end else begin
            wreg <= put(cur_word, j[0], int_sel);
            k0   <= 1'b1;
            if (last_neuron) begin
              st <= C_FPRE;
              if (timestep != 15'h7FFF) timestep <= timestep + 15'd1;
            end
            j <= last_neuron ? 9'd0 : j + 9'd1;
          end
        end
        C_FPRE: begin st <= C_FIRE; j <= '0; end
        C_FIRE: begin
          wreg <= put(cur_word, j[0], dec_sel);
          if (last_neuron) st <= C_FTAIL;
          j <= last_neuron ? 9'd0 : j + 9'd1;
        end
        C_FTAIL: st <= (cfg.learn_en && sup_valid) ? C_LSTART : C_IDLE;
        C_LSTART: st <= C_LWAIT;
        C_LWAIT: if (wu_done) st <= C_IDLE;
        default: st <= C_IDLE;
      endcase
    end
  end

  a_int_in_range:  assert property (@(posedge clk) disable iff (!rst_n) (st == C_INT || st == C_FIRE) |-> j < nn);
  a_clr_only_idle: assert property (@(posedge clk) disable iff (!rst_n) map_clr |-> !map_swap);
endmodule
