// mp_pe: message passing PE, scatter with merged aggregation.
//
// Pops one node u (id and freshly computed embedding x_u) from the node
// queue, walks u's out-neighbor slice of the CSR table, and for every edge
// (u -> v, attribute a) forms the GIN message
//     msg[k] = relu( x_u[k] + E_l[a][k] )      k = 0..EMB_DIM-1
// with E_l the edge embedding table of the layer being prepared, and adds
// it into v's partial message in the accumulating message buffer. Since the
// aggregation (sum) does not depend on order, the receivers aggregate as
// messages arrive and no separate gather pass or O(E) message storage is
// needed.
//
// Per node: 2 cycles to read degree and offset; per edge: 2 cycles to read
// the neighbor/attribute and the edge embedding row, then EMB_DIM cycles of
// one-element accumulate requests (the message buffer is unpartitioned).
// So a node of degree d occupies the PE for 2 + d*(EMB_DIM+2) cycles, which
// is what makes message passing time vary from node to node.
// Merging scatter with gather, and the CSR walk, follow the paper. The
// message form relu(x + e) is the usual GIN one (paper: "each node's
// outgoing message is a weighted sum of its own node embedding and the
// outgoing edge embedding"); the edge embedding being a per-layer table
// indexed by an edge attribute is this design's choice.
//
// Interface: pops with pop_valid/pop_ready; busy is low only when idle
// with nothing in flight. edge_layer selects E_l and must be stable while
// busy. Edge embeddings are written through param_wr (PS_EDGE, row = type).
module mp_pe #(
  parameter int MAX_NODES  = gengnn_pkg::MAX_NODES,
  parameter int MAX_EDGES  = gengnn_pkg::MAX_EDGES,
  parameter int EMB_DIM    = gengnn_pkg::EMB_DIM,
  parameter int NUM_LAYERS = gengnn_pkg::NUM_LAYERS,
  parameter int EDGE_TYPES = gengnn_pkg::EDGE_TYPES,
  parameter int NODE_W     = $clog2(MAX_NODES + 1),
  parameter int EDGE_W     = $clog2(MAX_EDGES + 1),
  parameter int ATTR_W     = $clog2(EDGE_TYPES),
  parameter int LAYER_W    = gengnn_pkg::LAYER_W,
  parameter int ADDR_W     = $clog2(MAX_NODES * EMB_DIM),
  parameter int Q_W        = NODE_W + EMB_DIM * gengnn_pkg::DATA_W
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  gengnn_pkg::param_wr_t param_wr,
  input  logic [LAYER_W-1:0]    edge_layer,
  // node queue
  input  logic                  pop_valid,
  output logic                  pop_ready,
  input  logic [Q_W-1:0]        pop_data,
  // CSR table reads
  output logic [NODE_W-1:0]     node_raddr,
  input  logic [EDGE_W-1:0]     deg_rdata,
  input  logic [EDGE_W-1:0]     off_rdata,
  output logic [EDGE_W-1:0]     edge_raddr,
  input  logic [NODE_W-1:0]     nbr_rdata,
  input  logic [ATTR_W-1:0]     attr_rdata,
  // accumulate into the message buffer
  output logic                  acc_en,
  output logic [ADDR_W-1:0]     acc_addr,
  output gengnn_pkg::fx_t       acc_val,
  output logic                  busy,
  output logic [31:0]           edges_done
);
  import gengnn_pkg::*;

  localparam int K_W  = $clog2(EMB_DIM + 1);
  localparam int ER_W = $clog2(NUM_LAYERS * EDGE_TYPES);
  typedef logic [EMB_DIM-1:0][DATA_W-1:0] vec_t;

  vec_t edge_emb [NUM_LAYERS * EDGE_TYPES];
  always_ff @(posedge clk)
    if (param_wr.en && param_wr.sel == PS_EDGE)
      edge_emb[ER_W'(32'(param_wr.layer) * EDGE_TYPES + 32'(param_wr.row))] <= param_wr.vec[EMB_DIM-1:0];

  typedef enum logic [2:0] {S_IDLE, S_DEG, S_NBR, S_EMB, S_ELEM} state_e;
  state_e state;

  vec_t              x_u;
  vec_t              e_row;
  logic [EDGE_W-1:0] ptr, rem;
  logic [NODE_W-1:0] dst;
  logic [K_W-1:0]    k;

  assign pop_ready  = (state == S_IDLE);
  assign node_raddr = pop_data[Q_W-1 -: NODE_W];
  assign edge_raddr = ptr;
  assign busy       = (state != S_IDLE);

  always_ff @(posedge clk)
    e_row <= edge_emb[ER_W'(32'(edge_layer) * EDGE_TYPES + 32'(attr_rdata))];

  assign acc_en   = (state == S_ELEM);
  assign acc_addr = ADDR_W'(32'(dst) * EMB_DIM + 32'(k));
  assign acc_val  = fx_relu(fx_t'(x_u[k]) + fx_t'(e_row[k]));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; ptr <= '0; rem <= '0; dst <= '0; k <= '0; x_u <= '0; edges_done <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (pop_valid) begin
          x_u   <= pop_data[EMB_DIM*DATA_W-1:0];
          state <= S_DEG;
        end
        S_DEG: begin
          ptr   <= off_rdata;
          rem   <= deg_rdata;
          state <= (deg_rdata == '0) ? S_IDLE : S_NBR;
        end
        S_NBR: state <= S_EMB;             // neighbor and attribute read
        S_EMB: begin                       // edge embedding row read
          dst   <= nbr_rdata;
          k     <= '0;
          state <= S_ELEM;
        end
        S_ELEM: begin
          k <= k + 1'b1;
          if (k == K_W'(EMB_DIM - 1)) begin
            edges_done <= edges_done + 1;
            ptr <= ptr + 1'b1;
            rem <= rem - 1'b1;
            state <= (rem == EDGE_W'(1)) ? S_IDLE : S_NBR;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
