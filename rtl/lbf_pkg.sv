// lbf_pkg: types, construction-time constants and arithmetic shared by the
// training pipeline.
//
// The pipeline trains a fully connected network of N_LAYERS layers with at
// most N_NEURONS neurons each. Every value (activation, weight, error,
// gradient) is a signed fixed-point number of DATA_W bits with FRAC_W
// fractional bits; products are truncated towards minus infinity and sums wrap
// modulo 2^DATA_W. The arithmetic format is a choice of this implementation:
// the reference build described for the architecture uses IEEE binary32, which
// is not reproduced here.
//
// Three streams recur throughout:
//   stream_t   one value per cycle with its element index and a `last` flag
//              (ACTIVATION, ERROR, TRUTH, STIMULUS exit)
//   pipe_t     activation plus its derivative, tagged with the neuron index
//              (the PIPE stream from a forward layer to its backward layer)
//   cfg_cmd_t  one configuration command: layer, neuron, index, parameter kind,
//              value (CONFIGURATION, RE-CONFIGURATION and LEARNED streams)
// Network-wide run-time registers are collected in net_cfg_t; the register
// map (index field of a command addressed to layer REG_LAYER) is given by the
// REG_* constants below.
package lbf_pkg;

  // ---- construction-time parameters (reference size: 4 layers of 64 neurons)
  parameter int unsigned N_LAYERS  = 4;
  parameter int unsigned N_NEURONS = 64;
  parameter int unsigned DATA_W    = 32;
  parameter int unsigned FRAC_W    = 16;

  // Index width: element indices 0..N_NEURONS (N_NEURONS is the bias slot);
  // at least 7 bits so the index field can address the register map.
  parameter int unsigned IDX_W = ($clog2(N_NEURONS + 1) > 7) ? $clog2(N_NEURONS + 1) : 7;
  // Layer field: forward layers 1..N_LAYERS, backward layers 0..N_LAYERS,
  // all-ones selects the network register file.
  parameter int unsigned LAY_W = $clog2(N_LAYERS + 2);
  parameter logic [LAY_W-1:0] REG_LAYER = '1;

  // Fixed latencies of the pipeline stages (the architecture's latency table)
  parameter int unsigned D_FWD        = 3;
  parameter int unsigned D_SIGMA      = 3;
  parameter int unsigned D_COST       = 3;
  parameter int unsigned D_BCK        = 3;
  parameter int unsigned D_UPDATE     = 2;
  parameter int unsigned D_SUM_ERROR  = 1;
  parameter int unsigned D_SUM_UPDATE = 3;
  parameter int unsigned D_CONFIG     = 2;

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic [IDX_W-1:0]         idx_t;
  typedef logic [LAY_W-1:0]         lay_t;

  parameter data_t FX_ONE = data_t'(1) <<< FRAC_W;

  typedef enum logic [2:0] {
    P_WEIGHT = 3'd0,  // value is weight w[layer][neuron][index]
    P_BIAS   = 3'd1,  // value is bias b[layer][neuron]
    P_REG    = 3'd2,  // network register (layer must be REG_LAYER)
    P_READ_W = 3'd3,  // read-out request for a weight
    P_READ_B = 3'd4,  // read-out request for a bias
    P_UPD_W  = 3'd5,  // update trigger: weights [index] of backward layer
    P_UPD_B  = 3'd6   // update trigger: biases of backward layer
  } param_e;

  typedef struct packed {
    logic   valid;
    logic   resp;    // set on read-out answers; decoders ignore them
    param_e param;
    lay_t   layer;
    idx_t   neuron;
    idx_t   index;
    data_t  value;
  } cfg_cmd_t;

  typedef struct packed {
    logic  valid;
    logic  last;
    idx_t  idx;
    data_t data;
  } stream_t;

  typedef struct packed {
    logic  valid;
    idx_t  idx;
    data_t act;
    data_t deriv;
  } pipe_t;

  // RESULT pipe slot of a backward neuron: an error value (learn state) or a
  // parameter value with its accumulated gradient (update state).
  typedef enum logic [1:0] {
    R_ERR = 2'd0,   // v = error epsilon_j
    R_W   = 2'd1,   // v = weight w^{l+1}_{kj}, g = its gradient
    R_B   = 2'd2    // v = bias b^l_j, g = its gradient
  } rkind_e;

  typedef struct packed {
    logic   valid;
    logic   par;     // sample / trigger parity, see lbf_bck_layer
    rkind_e kind;
    idx_t   k;       // weight index k of a R_W entry
    data_t  v;
    data_t  g;
  } res_t;

  typedef enum logic [1:0] {
    ACT_LINEAR = 2'd0,
    ACT_RELU   = 2'd1,
    ACT_PARELU = 2'd2
  } act_e;

  typedef enum logic [1:0] {
    ST_CONFIG  = 2'd0,
    ST_LEARN   = 2'd1,
    ST_UPDATE  = 2'd2,
    ST_READOUT = 2'd3
  } state_e;

  // ---- network register file ----------------------------------------------
  parameter int unsigned DLY_W = 12;   // delay-line setting width
  typedef struct packed {
    idx_t                       n_inputs;   // inputs per sample
    idx_t                       n_truth;    // truth values per sample
    logic [15:0]                n_batch;    // samples per batch
    data_t                      step;       // learning rate s
    logic [DLY_W-1:0]           truth_dly;  // delay-1 setting
    idx_t  [N_LAYERS:0]         n_neur;     // active neurons; [0] unused
    act_e  [N_LAYERS:0]         act_sel;    // activation per layer; [0] unused
    data_t [N_LAYERS:0]         slope;      // PaReLU negative slope per layer
    logic  [N_LAYERS:0][DLY_W-1:0] pipe_dly; // delay-2 setting per backward layer
  } net_cfg_t;

  parameter int unsigned REG_N_INPUTS  = 0;
  parameter int unsigned REG_N_TRUTH   = 1;
  parameter int unsigned REG_N_BATCH   = 2;
  parameter int unsigned REG_STEP      = 3;
  parameter int unsigned REG_TRUTH_DLY = 4;
  parameter int unsigned REG_N_NEUR    = 16;  // + layer
  parameter int unsigned REG_ACT_SEL   = 32;  // + layer
  parameter int unsigned REG_SLOPE     = 48;  // + layer
  parameter int unsigned REG_PIPE_DLY  = 64;  // + backward layer

  // ---- fixed-point arithmetic ---------------------------------------------
  function automatic data_t fx_mul(data_t a, data_t b);
    logic signed [2*DATA_W-1:0] p;
    p = a * b;
    return data_t'(p >>> FRAC_W);
  endfunction

  // Number of active neurons of layer l, with layer 0 being the inputs.
  function automatic idx_t n_of(net_cfg_t c, int unsigned l);
    return (l == 0) ? c.n_inputs : c.n_neur[l];
  endfunction

  // Number of active inputs of forward layer l (n^{l-1}).
  function automatic idx_t n_in_of(net_cfg_t c, int unsigned l);
    return (l == 1) ? c.n_inputs : c.n_neur[l-1];
  endfunction

endpackage
