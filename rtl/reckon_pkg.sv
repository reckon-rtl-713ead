// reckon_pkg: types and constants shared by the spiking-RNN processor.
//
// Widths that the processor description prints are used as given: 8-bit
// weights, 16-bit membrane potentials and thresholds, 12-bit input and
// recurrent eligibility traces, 10-bit output traces, 16 output neurons with
// 16-bit values, 5-bit straight-through-estimator values, 128-bit memory words.
// The packing of a neuron-memory word and the register map of the parameter
// bank are choices of this implementation (see param_bank and lif_neuron).
package reckon_pkg;

  localparam int unsigned N_MAX   = 256;  // hidden LIF neurons / input channels
  localparam int unsigned N_OUT   = 16;   // leaky-integrator output neurons
  localparam int unsigned W_W     = 8;    // synaptic weight width
  localparam int unsigned U_W     = 16;   // membrane potential / threshold width
  localparam int unsigned TRI_W   = 12;   // input eligibility trace width
  localparam int unsigned TRR_W   = 12;   // recurrent eligibility trace width
  localparam int unsigned TRO_W   = 10;   // output eligibility trace width
  localparam int unsigned ALPHA_W = 12;   // stored leak factor width
  localparam int unsigned KAPPA_W = 8;    // output leak factor width
  localparam int unsigned Y_W     = 16;   // output neuron value width
  localparam int unsigned STE_W   = 5;    // surrogate-derivative width
  localparam int unsigned WORD_W  = 128;  // memory word width
  localparam int unsigned NST_W   = U_W + TRI_W + TRR_W + TRO_W;  // 50 bits per neuron

  // State of one hidden neuron as kept in the neuron memory.
  typedef struct packed {
    logic [TRO_W-1:0]        tr_out;
    logic [TRR_W-1:0]        tr_rec;
    logic [TRI_W-1:0]        tr_inp;
    logic signed [U_W-1:0]   u;
  } neuron_t;

  // One 128-bit neuron-memory word: two neurons and their shared parameters.
  typedef struct packed {
    logic [ALPHA_W-1:0]      alpha;   // leak factor, value alpha/4096
    logic signed [U_W-1:0]   theta;   // firing threshold
    neuron_t                 n1;      // odd neuron 2k+1
    neuron_t                 n0;      // even neuron 2k
  } nword_t;

  // Decoded configuration (see param_bank for the register map).
  typedef struct packed {
    logic [8:0]              n_neur;     // enabled hidden neurons, 1..256
    logic [4:0]              n_out;      // enabled output neurons, 1..16
    logic [3:0]              sh_inp;     // input weight shift into u
    logic [3:0]              sh_rec;     // recurrent weight shift into u
    logic [3:0]              sh_out;     // output weight shift into y
    logic [3:0]              inc_inp;    // input trace increment = 1 << inc_inp
    logic [3:0]              inc_rec;
    logic [3:0]              inc_out;
    logic [KAPPA_W-1:0]      kappa;      // output leak, value kappa/256
    logic                    noise_en;
    logic                    sig_en;     // hard sigmoid on outputs
    logic                    class_mode; // 1: decision = highest average output, 0: selected y
    logic                    learn_en;
    logic                    reg_en;
    logic [3:0]              noise_sh;
    logic [4:0]              lr_out;
    logic [4:0]              lr_hid;
    logic [TRR_W-1:0]        reg_thr;
    logic [3:0]              reg_sh;
    logic [3:0][U_W-1:0]     ste_bp;     // STE breakpoints (signed)
    logic [4:0][STE_W-1:0]   ste_val;    // STE segment values (signed)
    logic [3:0]              out_sel;
  } cfg_t;

  // Targets of the configuration bus.
  typedef enum logic [2:0] {
    TGT_PARAM = 3'd0,
    TGT_WINP  = 3'd1,
    TGT_WREC  = 3'd2,
    TGT_WOUT  = 3'd3,
    TGT_NEUR  = 3'd4,
    TGT_Y     = 3'd5
  } tgt_e;

  // Saturate a wide signed value to w bits (w <= 32).
  function automatic logic signed [31:0] sat_s(input logic signed [47:0] v, input int w);
    logic signed [47:0] hi, lo;
    hi = (48'sd1 <<< (w-1)) - 48'sd1;
    lo = -(48'sd1 <<< (w-1));
    if (v > hi)      return 32'(hi);
    else if (v < lo) return 32'(lo);
    else             return 32'(v);
  endfunction

  // Rotate a 16-bit random word left by r, to give parallel lanes different
  // random values from one generator.
  function automatic logic [15:0] rotl16(input logic [15:0] v, input int r);
    logic [31:0] d;
    d = {v, v} << (r % 16);
    return d[31:16];
  endfunction

endpackage
