// kws_pkg -- types, constants and small arithmetic helpers shared by the
// event-driven keyword-spotting pipeline (timestamping, LIF event filter,
// graph generation, PointNetConv layers, window MaxPool and recurrent head).
//
// Fixed by the design described for this pipeline:
//   * 72 features per vertex, 8-bit quantised (NF, FEAT_W);
//   * at most 20 neighbours per vertex plus a self-loop (MAX_E);
//   * microsecond timestamps.
// Own choices of this implementation: 32-bit timestamps, 7-bit channel index
// (room for the largest 128-channel sensor), the layout of the configuration
// word, the fixed-point formats of the activations and the first-layer
// feature encoding (see feat1 below).
package kws_pkg;

  // ---------------------------------------------------------------------------
  // Sizes
  // ---------------------------------------------------------------------------
  localparam int unsigned TS_W    = 32;   // timestamp width, 1 us per LSB
  localparam int unsigned CH_W    = 7;    // channel index width (<=128 channels)
  localparam int unsigned MAX_CH  = 128;  // channels the feature memories are sized for
  localparam int unsigned NF      = 72;   // features per vertex / per head layer
  localparam int unsigned FEAT_W  = 8;    // bits per feature
  localparam int unsigned MAX_E   = 20;   // neighbours per vertex (self-loop extra)
  localparam int unsigned NE_W    = 5;    // width of a neighbour count (0..20)
  localparam int unsigned DT_W    = 16;   // width of a neighbour time distance
  localparam int unsigned F1_N    = 3;    // first-layer input features
  localparam int unsigned DT_SHIFT = 6;   // us -> feature scaling of time offsets
  localparam int unsigned WIN_W   = 16;   // window sequence number width

  // ---------------------------------------------------------------------------
  // Data types
  // ---------------------------------------------------------------------------
  // One sensor event (t, c, p); p = 1 encodes polarity +1, p = 0 polarity -1.
  typedef struct packed {
    logic [TS_W-1:0] t;
    logic [CH_W-1:0] c;
    logic            p;
  } event_t;

  // One directed edge from the new vertex to an earlier vertex: the earlier
  // vertex's channel and how many microseconds older it is.
  typedef struct packed {
    logic [CH_W-1:0] c;
    logic [DT_W-1:0] dt;
  } edge_t;

  // A vertex with its edge list, as produced by graph generation.
  typedef struct packed {
    event_t                  ev;
    logic [NE_W-1:0]         ne;
    edge_t [MAX_E-1:0]       edges;
  } gjob_t;

  typedef logic [FEAT_W-1:0] feat_t;
  typedef feat_t [NF-1:0]    fvec_t;   // element k is feature k, two's complement

  // A vertex travelling between PointNetConv layers: graph data + features.
  typedef struct packed {
    gjob_t g;
    fvec_t x;
  } cjob_t;

  // Window-end notice of the timestamp propagation path: the timestamp of the
  // last sensor event inside the window that has just ended.
  typedef struct packed {
    logic [WIN_W-1:0] win;
    logic             has_ev;   // 0: no event at all in that window
    logic [TS_W-1:0]  last_ts;
    logic [7:0]       n_last;   // events stamped in that last microsecond
  } winnote_t;

  // ---------------------------------------------------------------------------
  // Configuration bus: one write per cycle, broadcast to every layer.
  // ---------------------------------------------------------------------------
  typedef enum logic [3:0] {
    L_CONV1 = 4'd0, L_CONV2 = 4'd1, L_CONV3 = 4'd2, L_CONV4 = 4'd3,
    L_MLP1  = 4'd4, L_MLP2  = 4'd5, L_GRU   = 4'd6, L_CLS   = 4'd7,
    L_CONF  = 4'd8, L_LIF   = 4'd9
  } layer_e;

  typedef enum logic [1:0] {
    K_WEIGHT = 2'd0,   // row = output neuron, col = input element
    K_BIAS   = 2'd1,   // row = output neuron, col selects x/h bias in the GRU
    K_THRESH = 2'd2    // row = channel (LIF filter)
  } cfgkind_e;

  typedef struct packed {
    logic        we;
    layer_e      layer;
    cfgkind_e    kind;
    logic [7:0]  row;
    logic [7:0]  col;
    logic [31:0] data;
  } cfg_t;

  // ---------------------------------------------------------------------------
  // Arithmetic helpers
  // ---------------------------------------------------------------------------
  // Saturate a 32-bit value to int8.
  function automatic feat_t sat8(input logic signed [31:0] v);
    if (v > 32'sd127)       return 8'sh7f;
    else if (v < -32'sd128) return 8'h80;
    else                    return v[7:0];
  endfunction

  // Arithmetic right shift, saturate to int8 and apply ReLU.
  function automatic feat_t relu_q(input logic signed [31:0] acc, input int unsigned sh);
    logic signed [31:0] s;
    s = acc >>> sh;
    if (s < 0) return '0;
    return sat8(s);
  endfunction

  // Time distance (us, non-negative) of a neighbour as a signed feature:
  // -(dt >> DT_SHIFT), saturated at -128 (the neighbour lies in the past).
  function automatic feat_t dt_feat(input logic [DT_W-1:0] dt);
    logic [DT_W-1:0] q;
    q = dt >> DT_SHIFT;
    if (q > 16'd128) return 8'h80;
    return feat_t'(-int'(q));
  endfunction

  // Input features of a vertex for the first PointNetConv layer:
  // channel index, coarse timestamp (t[13:7], 128 us steps) and polarity (+-64).
  function automatic fvec_t feat1(input event_t e);
    fvec_t f;
    f = '0;
    f[0] = feat_t'({1'b0, e.c});
    f[1] = feat_t'({1'b0, e.t[13:7]});
    f[2] = e.p ? 8'sd64 : -8'sd64;
    return f;
  endfunction

  // Signed "a is later than b" on a wrapping timestamp.
  function automatic logic ts_after(input logic [TS_W-1:0] a, input logic [TS_W-1:0] b);
    logic [TS_W-1:0] d;
    d = a - b;
    return (d != '0) && !d[TS_W-1];
  endfunction

endpackage
