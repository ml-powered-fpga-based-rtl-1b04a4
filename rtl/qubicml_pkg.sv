// qubicml_pkg: types and constants shared by the readout/inference blocks.
//
// Fixed-point formats follow the paper's number formats: network data and
// biases are 27-bit signed Q10.17 (10 integer bits including sign, 17
// fraction bits), weights are 18-bit signed Q6.12, and the accumulated I/Q
// of one shot is a 32-bit signed integer. The 2-8-4-1 network shape is the
// paper's. The parameter-memory word map and the weighted-DLO widths are
// this design's own choices.
package qubicml_pkg;

  localparam int unsigned DATA_W   = 27;  // Q10.17
  localparam int unsigned FRAC_W   = 17;
  localparam int unsigned WEIGHT_W = 18;  // Q6.12
  localparam int unsigned WFRAC_W  = 12;
  localparam int unsigned ACC_W    = 32;  // accumulated shot value
  localparam int unsigned PROB_W   = 17;  // sigmoid output, Q0.17

  localparam int unsigned L0_N = 2;       // input nodes (I, Q)
  localparam int unsigned L1_N = 8;       // hidden layer 1
  localparam int unsigned L2_N = 4;       // hidden layer 2
  localparam int unsigned L3_N = 1;       // output node

  localparam int unsigned ADC_W = 16;     // ADC sample width
  localparam int unsigned DLO_W = 16;     // cos/sin amplitude, Q1.15
  localparam int unsigned DLOW_W = 16;    // envelope weight, unsigned Q1.15

  typedef logic signed [DATA_W-1:0]   fx_t;
  typedef logic signed [WEIGHT_W-1:0] wt_t;
  typedef logic signed [ACC_W-1:0]    acc_t;
  typedef logic signed [ADC_W-1:0]    adc_t;   // one ADC sample
  typedef logic signed [DLO_W-1:0]    dlo_t;   // one DLO cos or sin value
  typedef logic        [DLOW_W-1:0]   envw_t;  // one envelope weight

  // All parameters of one qubit's model, as held in registers.
  typedef struct packed {
    wt_t [L1_N-1:0][L0_N-1:0] w1;
    fx_t [L1_N-1:0]           b1;
    wt_t [L2_N-1:0][L1_N-1:0] w2;
    fx_t [L2_N-1:0]           b2;
    wt_t [L3_N-1:0][L2_N-1:0] w3;
    fx_t [L3_N-1:0]           b3;
    logic [4:0]               n_i;   // scaling exponent for I
    logic [4:0]               n_q;   // scaling exponent for Q
    acc_t                     mu_i;  // mean of I
    acc_t                     mu_q;  // mean of Q
  } fnn_params_t;

  // Word addresses inside the parameter memory.
  localparam int unsigned PA_W1   = 0;   // 16 words, w1[node][in] at node*2+in
  localparam int unsigned PA_B1   = 16;  // 8 words
  localparam int unsigned PA_W2   = 24;  // 32 words, w2[node][in] at node*8+in
  localparam int unsigned PA_B2   = 56;  // 4 words
  localparam int unsigned PA_W3   = 60;  // 4 words
  localparam int unsigned PA_B3   = 64;  // 1 word
  localparam int unsigned PA_NI   = 65;
  localparam int unsigned PA_NQ   = 66;
  localparam int unsigned PA_MUI  = 67;
  localparam int unsigned PA_MUQ  = 68;
  localparam int unsigned PA_WORDS = 69;

  // Per-channel host address regions (cfg_addr[15:14]).
  localparam logic [1:0] REG_CTRL  = 2'd0;
  localparam logic [1:0] REG_PARAM = 2'd1;
  // 2'd2 and 2'd3: DLO envelope weight memory, sample index in cfg_addr[11:0]

  // Control registers (cfg_addr[3:0] in REG_CTRL).
  localparam logic [3:0] CTRL_FWORD  = 4'd0;
  localparam logic [3:0] CTRL_PHASE  = 4'd1;
  localparam logic [3:0] CTRL_CMD    = 4'd2;  // bit0: load params, bit1: clear results

endpackage
