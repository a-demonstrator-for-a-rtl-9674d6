// gnn_pkg: types and constants shared by the TrackGNN engine.
//
// Number formats follow the Vitis-HLS fixed-point types of the model:
// embeddings, weights and biases are ap_fixed<18,6> (18 bits, 6 integer bits
// including the sign, 12 fraction bits); messages and input node features are
// ap_fixed<21,9> (21 bits, 9 integer bits, 12 fraction bits). Because both
// formats carry 12 fraction bits, conversion between them is a plain sign
// extension or truncation of the integer part. Arithmetic truncates toward
// minus infinity and wraps on overflow, the HLS defaults (AP_TRN, AP_WRAP).
//
// The embedding width (8), the number of MLP layers (4) and the graph size
// limits (200 nodes, 500 edges) are the model's numbers. The number of input
// features per hit (3, e.g. x, y, z) is this design's choice.
package gnn_pkg;

  localparam int unsigned EMB_DIM   = 8;    // node and edge embedding dimension
  localparam int unsigned N_LAYERS  = 4;    // MLP layers per embedding network
  localparam int unsigned EMB_W     = 18;   // ap_fixed<18,6>
  localparam int unsigned EMB_I     = 6;
  localparam int unsigned MSG_W     = 21;   // ap_fixed<21,9>
  localparam int unsigned MSG_I     = 9;
  localparam int unsigned FRAC      = EMB_W - EMB_I;  // 12, equal for both formats
  localparam int unsigned NODE_FEAT = 3;    // input features per hit
  localparam int unsigned MAX_NODES = 200;  // largest graph, nodes (hits)
  localparam int unsigned MAX_EDGES = 500;  // largest graph, edges

  typedef logic signed [EMB_W-1:0] emb_t;
  typedef logic signed [MSG_W-1:0] msg_t;

  typedef emb_t [EMB_DIM-1:0] emb_vec_t;
  typedef msg_t [EMB_DIM-1:0] msg_vec_t;

  // One decoded hit as it leaves the decoder / event builder: its features and
  // a flag marking the last hit of the event.
  typedef struct packed {
    logic                       last;
    msg_t [NODE_FEAT-1:0]       feat;
  } hit_t;

  // Weight-memory selector of the TrackGNN core.
  typedef enum logic {WSEL_NODE = 1'b0, WSEL_EDGE = 1'b1} wsel_e;

  // Number of parameters (weights and biases) of a 4-layer MLP whose first
  // layer takes in_dim inputs and whose layers are all EMB_DIM wide.
  function automatic int unsigned mlp_n_param(int unsigned in_dim);
    return EMB_DIM * in_dim + EMB_DIM + (N_LAYERS - 1) * (EMB_DIM * EMB_DIM + EMB_DIM);
  endfunction

endpackage
