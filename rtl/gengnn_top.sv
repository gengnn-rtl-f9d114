// gengnn_top: GenGNN message-passing accelerator, GIN configuration.
//
// A graph arrives raw: node features plus an unordered COO edge list, with
// no preprocessing on the host. The accelerator converts the edges to CSR
// on chip, then runs NUM_LAYERS GIN layers and a pooled linear head, and
// returns NUM_TASKS predictions. Each layer is executed by two PEs joined by
// a node queue:
//   node embedding PE (ne_pe + mlp_pe)  x_v <- MLP((1+eps) x_v + m_v), node by node
//   message passing PE (mp_pe)          scatters relu(x_v + e) to v's out-neighbors,
//                                       accumulating straight into their messages
// with one O(N) node embedding buffer and two O(N) message buffers that swap
// roles every layer. Because the queue decouples the PEs, NE keeps producing
// while MP is busy with a high-degree node and MP catches up on low-degree
// ones (streaming-based pipelining). With vn_en the converter adds a virtual
// node linked both ways to every node; it is processed first so that its
// long scatter overlaps the other nodes' embedding.
//
// Use: load all parameters through param_wr (any time the core is idle),
// wait for init_busy low after reset, then pulse start with num_nodes,
// num_edges and vn_en, stream (num_nodes+vn_en)*EMB_DIM features on nf_*
// and num_edges edges on e_* (in any order, concurrently). done pulses with
// result valid; cycles holds the latency of the graph in clock cycles.
module gengnn_top #(
  parameter int MAX_NODES   = gengnn_pkg::MAX_NODES,
  parameter int MAX_EDGES   = gengnn_pkg::MAX_EDGES,
  parameter int EMB_DIM     = gengnn_pkg::EMB_DIM,
  parameter int NUM_LAYERS  = gengnn_pkg::NUM_LAYERS,
  parameter int EDGE_TYPES  = gengnn_pkg::EDGE_TYPES,
  parameter int QUEUE_DEPTH = gengnn_pkg::QUEUE_DEPTH,
  parameter int NUM_TASKS   = gengnn_pkg::NUM_TASKS,
  parameter int NODE_W      = $clog2(MAX_NODES + 1),
  parameter int EDGE_W      = $clog2(MAX_EDGES + 1),
  parameter int ATTR_W      = $clog2(EDGE_TYPES)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  gengnn_pkg::param_wr_t param_wr,
  output logic                  init_busy,
  input  logic                  start,
  input  logic [NODE_W-1:0]     num_nodes,
  input  logic [EDGE_W-1:0]     num_edges,
  input  logic                  vn_en,
  input  logic                  nf_valid,
  output logic                  nf_ready,
  input  gengnn_pkg::fx_t       nf_data,
  input  logic                  e_valid,
  output logic                  e_ready,
  input  logic [NODE_W-1:0]     e_src,
  input  logic [NODE_W-1:0]     e_dst,
  input  logic [ATTR_W-1:0]     e_attr,
  output logic                  busy,
  output logic                  done,
  output gengnn_pkg::fx_t       result [NUM_TASKS],
  output logic [31:0]           cycles
);
  import gengnn_pkg::*;

  localparam int LAYER_W = $clog2(NUM_LAYERS + 1);
  localparam int ADDR_W  = $clog2(MAX_NODES * EMB_DIM);
  localparam int Q_W     = NODE_W + EMB_DIM * DATA_W;
  localparam int QC_W    = $clog2(QUEUE_DEPTH + 1);

  // CSR table
  logic              csr_node_we, csr_edge_we;
  logic [NODE_W-1:0] csr_node_waddr, csr_nbr_wdata, csr_node_raddr, csr_nbr_rdata;
  logic [EDGE_W-1:0] csr_deg_wdata, csr_off_wdata, csr_edge_waddr, csr_deg_rdata, csr_off_rdata, csr_edge_raddr;
  logic [ATTR_W-1:0] csr_attr_wdata, csr_attr_rdata;
  // converter
  logic              conv_start, conv_busy, conv_done;
  logic [NODE_W-1:0] conv_tot_nodes;
  logic [EDGE_W-1:0] conv_tot_edges;
  // node embedding buffer
  logic              nb_re, nb_we, ne_nb_we, feat_we;
  logic [ADDR_W-1:0] nb_raddr, nb_waddr, ne_nb_waddr, feat_waddr;
  fx_t               nb_rdata, nb_wdata, ne_nb_wdata;
  // message buffers
  logic              rd_bank, mb_rd_en, mb_acc_en;
  logic [ADDR_W-1:0] mb_rd_addr, mb_acc_addr;
  fx_t               mb_rd_data, mb_acc_val;
  // node queue
  logic              q_push_valid, q_push_ready, q_pop_valid, q_pop_ready;
  logic [Q_W-1:0]    q_push_data, q_pop_data;
  logic [QC_W-1:0]   q_count;
  // NE PE
  logic              ne_start, ne_push_en, ne_last_layer, ne_busy, ne_done, pool_valid;
  ne_mode_e          ne_mode;
  logic [LAYER_W-1:0] ne_layer, mp_edge_layer;
  fx_t               pool_vec [EMB_DIM];
  // MP PE
  logic              mp_busy;
  logic [31:0]       mp_edges_done;
  // head and control
  logic              head_clear, head_start, head_busy, head_done, vn_q;
  logic [NODE_W-1:0] tot_nodes, orig_nodes;

  gengnn_ctrl #(
    .MAX_NODES(MAX_NODES), .MAX_EDGES(MAX_EDGES), .EMB_DIM(EMB_DIM), .NUM_LAYERS(NUM_LAYERS),
    .NODE_W(NODE_W), .EDGE_W(EDGE_W), .LAYER_W(LAYER_W), .ADDR_W(ADDR_W), .QC_W(QC_W)
  ) u_ctrl (
    .clk, .rst_n, .start, .num_nodes, .num_edges, .vn_en, .busy, .done, .cycles,
    .nf_valid, .nf_ready, .feat_we, .feat_waddr,
    .conv_start, .conv_done,
    .mb_init_busy(init_busy), .rd_bank,
    .ne_start, .ne_mode, .ne_layer, .ne_push_en, .ne_last_layer, .ne_done,
    .mp_edge_layer, .mp_busy, .q_count,
    .head_clear, .head_start, .head_done,
    .tot_nodes, .orig_nodes, .vn_q
  );

  coo_to_csr #(
    .MAX_NODES(MAX_NODES), .MAX_EDGES(MAX_EDGES), .NODE_W(NODE_W), .EDGE_W(EDGE_W),
    .ATTR_W(ATTR_W), .VN_ATTR(ATTR_W'(EDGE_TYPES - 1))
  ) u_conv (
    .clk, .rst_n, .start(conv_start), .num_nodes, .num_edges, .vn_en,
    .e_valid, .e_ready, .e_src, .e_dst, .e_attr,
    .node_we(csr_node_we), .node_waddr(csr_node_waddr), .deg_wdata(csr_deg_wdata),
    .off_wdata(csr_off_wdata), .edge_we(csr_edge_we), .edge_waddr(csr_edge_waddr),
    .nbr_wdata(csr_nbr_wdata), .attr_wdata(csr_attr_wdata),
    .busy(conv_busy), .done(conv_done), .tot_nodes(conv_tot_nodes), .tot_edges(conv_tot_edges)
  );

  csr_table #(
    .MAX_NODES(MAX_NODES), .MAX_EDGES(MAX_EDGES), .NODE_W(NODE_W), .EDGE_W(EDGE_W), .ATTR_W(ATTR_W)
  ) u_csr (
    .clk,
    .node_we(csr_node_we), .node_waddr(csr_node_waddr), .deg_wdata(csr_deg_wdata), .off_wdata(csr_off_wdata),
    .edge_we(csr_edge_we), .edge_waddr(csr_edge_waddr), .nbr_wdata(csr_nbr_wdata), .attr_wdata(csr_attr_wdata),
    .node_raddr(csr_node_raddr), .deg_rdata(csr_deg_rdata), .off_rdata(csr_off_rdata),
    .edge_raddr(csr_edge_raddr), .nbr_rdata(csr_nbr_rdata), .attr_rdata(csr_attr_rdata)
  );

  // the node embedding buffer is written by the feature loader, then by NE
  assign nb_we    = feat_we || ne_nb_we;
  assign nb_waddr = feat_we ? feat_waddr : ne_nb_waddr;
  assign nb_wdata = feat_we ? nf_data : ne_nb_wdata;

  node_emb_buffer #(.MAX_NODES(MAX_NODES), .EMB_DIM(EMB_DIM)) u_nbuf (
    .clk, .re(nb_re), .raddr(nb_raddr), .rdata(nb_rdata),
    .we(nb_we), .waddr(nb_waddr), .wdata(nb_wdata)
  );

  msg_buffers #(.MAX_NODES(MAX_NODES), .EMB_DIM(EMB_DIM)) u_mbuf (
    .clk, .rst_n, .rd_bank, .init_busy,
    .rd_en(mb_rd_en), .rd_addr(mb_rd_addr), .rd_data(mb_rd_data),
    .acc_en(mb_acc_en), .acc_addr(mb_acc_addr), .acc_val(mb_acc_val)
  );

  ne_pe #(
    .MAX_NODES(MAX_NODES), .EMB_DIM(EMB_DIM), .NUM_LAYERS(NUM_LAYERS), .NODE_W(NODE_W),
    .LAYER_W(LAYER_W), .ADDR_W(ADDR_W), .Q_W(Q_W)
  ) u_ne (
    .clk, .rst_n, .param_wr,
    .cmd_start(ne_start), .mode(ne_mode), .layer(ne_layer), .num_nodes(tot_nodes), .vn_en(vn_q),
    .push_en(ne_push_en), .last_layer(ne_last_layer), .busy(ne_busy), .done(ne_done),
    .nb_re, .nb_raddr, .nb_rdata, .nb_we(ne_nb_we), .nb_waddr(ne_nb_waddr), .nb_wdata(ne_nb_wdata),
    .mb_rd_en, .mb_rd_addr, .mb_rd_data,
    .q_valid(q_push_valid), .q_ready(q_push_ready), .q_data(q_push_data),
    .pool_valid, .pool_vec
  );

  node_queue #(.DEPTH(QUEUE_DEPTH), .WIDTH(Q_W), .CNT_W(QC_W)) u_queue (
    .clk, .rst_n,
    .push_valid(q_push_valid), .push_ready(q_push_ready), .push_data(q_push_data),
    .pop_valid(q_pop_valid), .pop_ready(q_pop_ready), .pop_data(q_pop_data), .count(q_count)
  );

  mp_pe #(
    .MAX_NODES(MAX_NODES), .MAX_EDGES(MAX_EDGES), .EMB_DIM(EMB_DIM), .NUM_LAYERS(NUM_LAYERS),
    .EDGE_TYPES(EDGE_TYPES), .NODE_W(NODE_W), .EDGE_W(EDGE_W), .ATTR_W(ATTR_W),
    .LAYER_W(LAYER_W), .ADDR_W(ADDR_W), .Q_W(Q_W)
  ) u_mp (
    .clk, .rst_n, .param_wr, .edge_layer(mp_edge_layer),
    .pop_valid(q_pop_valid), .pop_ready(q_pop_ready), .pop_data(q_pop_data),
    .node_raddr(csr_node_raddr), .deg_rdata(csr_deg_rdata), .off_rdata(csr_off_rdata),
    .edge_raddr(csr_edge_raddr), .nbr_rdata(csr_nbr_rdata), .attr_rdata(csr_attr_rdata),
    .acc_en(mb_acc_en), .acc_addr(mb_acc_addr), .acc_val(mb_acc_val),
    .busy(mp_busy), .edges_done(mp_edges_done)
  );

  graph_head #(.EMB_DIM(EMB_DIM), .NUM_TASKS(NUM_TASKS), .NODE_W(NODE_W)) u_head (
    .clk, .rst_n, .param_wr, .clear(head_clear),
    .acc_valid(pool_valid), .acc_vec(pool_vec),
    .start(head_start), .num_nodes(orig_nodes),
    .busy(head_busy), .done(head_done), .out(result)
  );

endmodule
