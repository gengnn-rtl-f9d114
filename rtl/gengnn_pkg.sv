// gengnn_pkg: types, sizes and fixed-point helpers shared by the GenGNN blocks.
//
// All activations, weights and messages are 32-bit signed fixed point with
// FRAC_W fractional bits (the 32-bit width is the published one; the split
// into 16 integer / 16 fraction bits is a choice of this design). A product
// is formed at 64 bits, shifted right by FRAC_W and truncated to 32 bits;
// sums wrap at 32 bits, as a 32-bit fixed-point type does in HLS.
//
// The default sizes (embedding dimension 100, 5 layers) are the GIN/GIN-VN
// configuration evaluated on the molecular datasets. MAX_NODES, MAX_EDGES
// and the number of edge types are this design's choice, sized for
// molecular graphs.
//
// param_wr_t is the one bundle through which the host writes every learned
// parameter (MLP weights and biases, epsilon, edge embeddings, head).
package gengnn_pkg;

  parameter int DATA_W     = 32;
  parameter int FRAC_W     = 16;
  parameter int EMB_DIM    = 100;
  parameter int NUM_LAYERS = 5;
  parameter int MAX_NODES  = 512;
  parameter int MAX_EDGES  = 2048;
  parameter int EDGE_TYPES = 16;   // edge attribute codes; the last one marks virtual edges
  parameter int QUEUE_DEPTH = 10;  // node queue depth in nodes
  parameter int NUM_TASKS  = 1;    // outputs of the linear head (one for MolHIV)
  parameter int NODE_W     = $clog2(MAX_NODES + 1);
  parameter int EDGE_W     = $clog2(MAX_EDGES + 1);
  parameter int ATTR_W     = $clog2(EDGE_TYPES);
  parameter int LAYER_W    = $clog2(NUM_LAYERS + 1);
  parameter int ROW_W      = 16;   // row index width of the parameter-write bundle

  typedef logic signed [DATA_W-1:0] fx_t;

  // Which parameter memory a param_wr_t beat targets.
  typedef enum logic [3:0] {
    PS_W1      = 4'd0,  // MLP layer 1 weights, row = hidden unit h, vec = W1[h][0..F-1]
    PS_W2T     = 4'd1,  // MLP layer 2 weights transposed, row = h, vec = W2[0..F-1][h]
    PS_B1      = 4'd2,  // MLP layer 1 bias, row = h, vec[0] = b1[h]
    PS_B2      = 4'd3,  // MLP layer 2 bias, vec = b2[0..F-1]
    PS_EPS     = 4'd4,  // GIN epsilon of a layer, vec[0]
    PS_EDGE    = 4'd5,  // edge embedding, row = edge type, vec = embedding
    PS_HEAD_W  = 4'd6,  // head weights, row = task, vec = W[task][0..F-1]
    PS_HEAD_B  = 4'd7   // head bias, row = task, vec[0]
  } param_sel_e;

  typedef struct packed {
    logic                     en;
    param_sel_e               sel;
    logic [LAYER_W-1:0]       layer;
    logic [ROW_W-1:0]         row;
    logic [EMB_DIM-1:0][DATA_W-1:0] vec;
  } param_wr_t;

  // NE PE operating modes.
  typedef enum logic [1:0] {
    NE_BYPASS  = 2'd0,  // push the stored embedding unchanged (initial scatter)
    NE_COMPUTE = 2'd1   // GIN update: MLP((1+eps)x + m)
  } ne_mode_e;

  function automatic fx_t fx_mul(fx_t a, fx_t b);
    logic signed [2*DATA_W-1:0] p;
    p = 64'(a) * 64'(b);
    return p[FRAC_W +: DATA_W];
  endfunction

  function automatic fx_t fx_relu(fx_t a);
    return a[DATA_W-1] ? '0 : a;
  endfunction

endpackage
