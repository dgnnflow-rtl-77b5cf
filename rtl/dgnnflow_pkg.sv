// dgnnflow_pkg - shared parameters and types of the DGNNFlow EdgeConv
// inference kernel.
//
// The kernel runs EdgeConv message passing on a graph of up to MAX_NODES
// nodes and MAX_EDGES directed edges. Node embeddings are EMB_DIM signed
// fixed-point numbers of DATA_W bits with FRAC_W fraction bits. Arithmetic
// saturates to the DATA_W range.
//
// Following the paper: P_EDGE = 4 message-passing units / buffer banks,
// P_NODE = 2 node-transformation units, NUM_LAYERS = 2 message-passing
// layers. This design's own choices: the number format (Q7.8, 16 bit), the
// embedding width (16) and the graph capacity (128 nodes, 1024 edges, which
// covers the 18..70-node, 50..770-edge events the paper evaluates).
package dgnnflow_pkg;

  parameter int unsigned P_EDGE     = 4;
  parameter int unsigned P_NODE     = 2;
  parameter int unsigned EMB_DIM    = 16;
  parameter int unsigned DATA_W     = 16;
  parameter int unsigned FRAC_W     = 8;
  parameter int unsigned MAX_NODES  = 128;
  parameter int unsigned MAX_EDGES  = 1024;
  parameter int unsigned NUM_LAYERS = 2;

  parameter int unsigned NODE_W = $clog2(MAX_NODES);
  parameter int unsigned CNT_W  = $clog2(MAX_NODES + 1);
  parameter int unsigned EDGE_W = $clog2(MAX_EDGES + 1);
  parameter int unsigned ROW_W  = $clog2((MAX_NODES + P_EDGE - 1) / P_EDGE);
  parameter int unsigned ROWS   = (MAX_NODES + P_EDGE - 1) / P_EDGE;

  typedef logic signed [DATA_W-1:0] fx_t;
  typedef fx_t [EMB_DIM-1:0]        emb_t;
  typedef logic [NODE_W-1:0]        node_t;

  // One beat of the broadcast stream: a node embedding, or the end token.
  typedef struct packed {
    logic  last;
    node_t id;
    emb_t  x;
  } bcast_beat_t;

  // One message for a node (MP unit -> adapter -> NT unit).
  typedef struct packed {
    node_t id;
    emb_t  m;
  } msg_beat_t;

  // One directed edge (u, v): the message phi(x_u, x_v - x_u) goes to u.
  typedef struct packed {
    node_t u;
    node_t v;
  } edge_t;

  // Per-layer weights of the message function and of the folded BatchNorm.
  typedef fx_t [EMB_DIM-1:0][2*EMB_DIM-1:0] wmat_t;

  // Words per layer in the weight store: W, b, BN scale, BN shift.
  parameter int unsigned LAYER_WORDS = EMB_DIM * 2 * EMB_DIM + 3 * EMB_DIM;
  parameter int unsigned WADDR_W     = $clog2(NUM_LAYERS * LAYER_WORDS);

  // Saturate a wide signed value to DATA_W bits.
  function automatic fx_t sat(input logic signed [47:0] v);
    localparam logic signed [47:0] MAXV = 48'sd2 ** (DATA_W - 1) - 1;
    localparam logic signed [47:0] MINV = -(48'sd2 ** (DATA_W - 1));
    if (v > MAXV) return fx_t'(MAXV);
    if (v < MINV) return fx_t'(MINV);
    return fx_t'(v);
  endfunction

  // Fixed-point product, rounded toward minus infinity, kept wide.
  function automatic logic signed [47:0] fmul(input fx_t a, input fx_t b);
    logic signed [47:0] p;
    p = 48'(a) * 48'(b);
    return p >>> FRAC_W;
  endfunction

endpackage
