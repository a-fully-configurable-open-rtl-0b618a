// quantisenc_pkg: types and helpers shared by every block of the spiking core.
//
// All neuron signals are signed two's-complement Qn.q numbers of W = QN + QQ bits
// (QN integer bits including the sign, QQ fraction bits). The baseline is Q5.3.
// The package defines the layer connection kinds, the four reset mechanisms, the
// per-layer control-register bundle, the weight and configuration write words, and
// a saturating adder used by the accumulators. Saturation and all encodings here are
// this design's own choices; the number formats and the set of parameters follow the
// source description of the core.
// Lint note: W_DEF is only the default width of syn_mem, so a linter that reads the
// package alone, or with a block that sets its own width, reports it as unused.
package quantisenc_pkg;

  // Baseline fixed-point format Q5.3.
  localparam int unsigned QN_DEF = 5;
  localparam int unsigned QQ_DEF = 3;
  localparam int unsigned W_DEF  = QN_DEF + QQ_DEF;

  // Widths of the control and write interfaces (big enough for any parameter choice
  // with W <= 32, layers <= 16, neurons <= 4096 and connections <= 4096).
  localparam int unsigned DATA_W  = 32;
  localparam int unsigned LAYER_W = 4;
  localparam int unsigned NEUR_W  = 12;
  localparam int unsigned CONN_W  = 12;
  localparam int unsigned REF_W   = 8;

  // Layer-to-layer connection modality (connection parameter alpha).
  typedef enum logic [1:0] {
    CONN_FULL    = 2'd0,  // alpha = 1 for every (i, j)
    CONN_ONE2ONE = 2'd1,  // alpha = 1 iff i == j
    CONN_GAUSS   = 2'd2   // alpha = 1 iff |i - j| <= 1
  } conn_t;

  // Reset mechanism applied after a spike, in the order of the reset equation.
  typedef enum logic [1:0] {
    RST_CONST   = 2'd0,   // U <- V_reset
    RST_ZERO    = 2'd1,   // U <- 0
    RST_SUB     = 2'd2,   // U <- U - V_th
    RST_DEFAULT = 2'd3    // U <- U - decay_rate * U
  } reset_mech_t;

  // Control-register addresses inside one layer's register set.
  typedef enum logic [2:0] {
    REG_GROWTH  = 3'd0,
    REG_DECAY   = 3'd1,
    REG_VTH     = 3'd2,
    REG_VRESET  = 3'd3,
    REG_REFPER  = 3'd4,
    REG_REFEN   = 3'd5,
    REG_RSTMECH = 3'd6
  } cfg_reg_t;

  // Run-time neuron parameters of one layer (values are W-bit Qn.q in the low bits).
  typedef struct packed {
    logic [DATA_W-1:0] growth_rate;
    logic [DATA_W-1:0] decay_rate;
    logic [DATA_W-1:0] vth;
    logic [DATA_W-1:0] v_reset;
    logic [REF_W-1:0]  refractory_period;
    logic              refractory_en;
    reset_mech_t       reset_mech;
  } lif_cfg_t;

  // cfg_in word: one control register write per mem_clk cycle.
  typedef struct packed {
    logic               we;
    logic [LAYER_W-1:0] layer;
    cfg_reg_t           addr;
    logic [DATA_W-1:0]  data;
  } cfg_wr_t;

  // wt_in word: one synaptic weight w(layer, neuron j, connection k) per mem_clk cycle.
  typedef struct packed {
    logic               we;
    logic [LAYER_W-1:0] layer;
    logic [NEUR_W-1:0]  neuron;
    logic [CONN_W-1:0]  conn;
    logic [DATA_W-1:0]  data;
  } wt_wr_t;

  // Per-time-step sweep control broadcast by a layer's address generator.
  typedef struct packed {
    logic start;  // first address of the sweep is being read
    logic vld;    // weight and spike of one connection are valid this cycle
    logic last;   // this is the last connection of the sweep
    logic skip;   // time step without any input spike: activation is zero
  } sweep_t;

  // Number of weights each neuron stores for a connection modality.
  function automatic int unsigned conn_depth(conn_t c, int unsigned n_pre);
    case (c)
      CONN_ONE2ONE: return 1;
      CONN_GAUSS:   return 3;
      default:      return n_pre;
    endcase
  endfunction

  // Saturating signed addition of two W-bit numbers held in 32-bit containers.
  function automatic logic signed [31:0] sat_add(logic signed [31:0] a, logic signed [31:0] b,
                                                 int unsigned w);
    logic signed [32:0] s;
    logic signed [32:0] hi;
    logic signed [32:0] lo;
    s  = 33'(a) + 33'(b);
    hi = (33'sd1 <<< (w - 1)) - 33'sd1;
    lo = -(33'sd1 <<< (w - 1));
    if (s > hi)      return hi[31:0];
    else if (s < lo) return lo[31:0];
    else             return s[31:0];
  endfunction

endpackage
