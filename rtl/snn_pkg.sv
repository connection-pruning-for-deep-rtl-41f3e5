// snn_pkg: types and constants shared by the accelerator blocks.
//
// Number formats (this design's choice; the published design describes weights only as
// values in [0, 1]):
//   weight      W_BITS = 16, unsigned Q0.16, value = w / 65536. Zero marks a
//               pruned (or absent) connection.
//   potential   V_BITS = 32, unsigned sum of Q0.16 weights.
//   time step   T_BITS = 8, first time step of a sample is 1, so that a
//               postsynaptic spike time is never zero.
//   decrements  D_BITS = 10, saturating count of LTD events per connection.
//
// The host talks to the accelerator with a stream of cmd_t words and receives
// rsp_t words. The command set is this design's own: the published design only says the
// CPU sends spike events.
//
// The network table (LAYER_*) is the three convolutional layers of the
// evaluated network. Each layer is learned as a dense set of kernels: the
// presynaptic inputs of a layer are the elements of one receptive-field window
// (kernel width x height x input channels) and the postsynaptic neurons are
// the kernels (feature maps). Input channel counts are this design's choice
// (2 DoG channels for the first layer, then the previous layer's kernels).
package snn_pkg;

  localparam int unsigned W_BITS    = 16;
  localparam int unsigned V_BITS    = 32;
  localparam int unsigned T_BITS    = 8;
  localparam int unsigned D_BITS    = 10;
  localparam int unsigned PRE_BITS  = 12;
  localparam int unsigned POST_BITS = 8;
  localparam int unsigned DATA_BITS = 32;

  localparam logic [W_BITS-1:0] W_MAX = '1;
  localparam logic [T_BITS-1:0] T_MAX = '1;
  localparam logic [D_BITS-1:0] D_MAX = '1;

  // Evaluated network: kernels 5x5x4, 17x17x20, 5x5x20 (width x height x
  // number of kernels); input channels 2, 4, 20.
  localparam int unsigned N_LAYERS = 3;
  localparam int unsigned LAYER_PRE  [N_LAYERS] = '{5*5*2, 17*17*4, 5*5*20};
  localparam int unsigned LAYER_POST [N_LAYERS] = '{4, 20, 20};

  // Default array geometry: N_PE processing elements, each owning NPP
  // postsynaptic neurons, so that N_PE*NPP covers the widest layer.
  localparam int unsigned DEF_N_PE    = 4;
  localparam int unsigned DEF_NPP     = 5;
  localparam int unsigned DEF_MAX_PRE = 17*17*4;
  // One weight-memory word holds the N_PE weights of (pre, local neuron).
  // Words per layer = LAYER_PRE * NPP; all three layers are resident.
  localparam int unsigned DEF_WORDS   = (5*5*2 + 17*17*4 + 5*5*20) * DEF_NPP;

  // Word address of the first weight of layer l for a given NPP.
  function automatic int unsigned layer_base(int unsigned l, int unsigned npp);
    int unsigned b = 0;
    for (int unsigned i = 0; i < N_LAYERS; i++)
      if (i < l) b += LAYER_PRE[i] * npp;
    return b;
  endfunction

  typedef enum logic [3:0] {
    OP_NOP          = 4'd0,
    OP_SET_PARAM    = 4'd1,  // pre = param_e, data = value
    OP_WRITE_W      = 4'd2,  // weight of (pre, post) of the current layer := data
    OP_READ_W       = 4'd3,  // respond RSP_WEIGHT with weight of (pre, post)
    OP_START_SAMPLE = 4'd4,  // clear potentials, spike times and spike list
    OP_SPIKE        = 4'd5,  // presynaptic input pre spikes in the current step
    OP_END_STEP     = 4'd6,  // threshold phase, STDP for new spikes, next step
    OP_END_SAMPLE   = 4'd7,  // count the iteration; dynamic pruning every k
    OP_LAYER_DONE   = 4'd8   // post-learning pruning of the current layer
  } op_e;

  typedef enum logic [3:0] {
    P_VTH    = 4'd0,   // firing threshold (V_BITS, Q16.16)
    P_APLUS  = 4'd1,   // LTP rate a+ (Q0.16)
    P_AMINUS = 4'd2,   // LTD rate |a-| (Q0.16)
    P_ALPHA  = 4'd3,   // dynamic pruning threshold alpha (integer)
    P_BETA   = 4'd4,   // post-learning pruning threshold beta (Q0.16)
    P_K      = 4'd5,   // dynamic pruning period k (learning iterations)
    P_FLAGS  = 4'd6,   // {wta, dyn_prune_en, learn}
    P_BASE   = 4'd7,   // weight-memory word address of the layer; restarts k count
    P_NPRE   = 4'd8,   // presynaptic inputs of the layer
    P_NPOST  = 4'd9    // postsynaptic neurons of the layer
  } param_e;

  typedef struct packed {
    op_e                  op;
    logic [POST_BITS-1:0] post;
    logic [PRE_BITS-1:0]  pre;
    logic [DATA_BITS-1:0] data;
  } cmd_t;

  typedef enum logic [1:0] {
    RSP_SPIKE  = 2'd0,  // postsynaptic neuron post fired at time
    RSP_WEIGHT = 2'd1,  // data = weight read by OP_READ_W
    RSP_DONE   = 2'd2   // end of OP_END_SAMPLE / OP_LAYER_DONE, data = connections pruned
  } rsp_e;

  typedef struct packed {
    rsp_e                 kind;
    logic [POST_BITS-1:0] post;
    logic [T_BITS-1:0]    time_step;
    logic [DATA_BITS-1:0] data;
  } rsp_t;

  typedef enum logic [0:0] {PRUNE_DYNAMIC = 1'b0, PRUNE_POST = 1'b1} prune_mode_e;

  // Event counters brought out of the accelerator.
  typedef struct packed {
    logic [31:0] syn_ops;      // potential updates performed by the PEs
    logic [31:0] syn_skips;    // potential updates skipped (zero weight)
    logic [31:0] stdp_ltp;     // LTP updates
    logic [31:0] stdp_ltd;     // LTD updates
    logic [31:0] stdp_skips;   // STDP visits to pruned connections
    logic [31:0] pruned_dyn;   // connections removed by dynamic pruning
    logic [31:0] pruned_post;  // connections removed by post-learning pruning
    logic [31:0] prune_runs;   // dynamic pruning passes
  } stats_t;

endpackage
