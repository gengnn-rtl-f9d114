// gengnn_ctrl: sequencer of one graph through the layer-recursive datapath.
//
// The same NE PE, MP PE and buffers are reused for every layer. For one
// graph the controller steps through:
//   LOAD      node features stream into the node embedding buffer (node-major,
//             one element per beat) while the converter turns the COO edge
//             stream into CSR; both must finish
//   PROLOGUE  NE in bypass mode pushes every input embedding; MP scatters the
//             layer-0 messages into message buffer 0
//   LAYER l   NE computes layer l reading buffer l%2; unless l is the last
//             layer, NE pushes and MP scatters the layer-(l+1) messages into
//             the other buffer. The controller waits until NE is done, the
//             node queue is empty, MP is idle and the accumulate pipeline has
//             settled, then swaps the buffers for the next layer
//   HEAD      global average pooling and the linear head
// NE and MP overlap through the node queue inside each pass; passes do not
// overlap, because layer l+1 needs every message of layer l.
// The pass structure and the buffer swap follow the paper; the bypass
// prologue that produces the first layer's messages is this design's way of
// starting the recursion.
//
// Interface: pulse start (while busy is low) with num_nodes, num_edges and
// vn_en valid; the caller then supplies (num_nodes + vn_en) * EMB_DIM feature
// elements on nf_* (the virtual node's features last). done pulses when the
// head has produced its outputs; cycles counts the cycles since start.
module gengnn_ctrl #(
  parameter int MAX_NODES  = gengnn_pkg::MAX_NODES,
  parameter int MAX_EDGES  = gengnn_pkg::MAX_EDGES,
  parameter int EMB_DIM    = gengnn_pkg::EMB_DIM,
  parameter int NUM_LAYERS = gengnn_pkg::NUM_LAYERS,
  parameter int NODE_W     = $clog2(MAX_NODES + 1),
  parameter int EDGE_W     = $clog2(MAX_EDGES + 1),
  parameter int LAYER_W    = gengnn_pkg::LAYER_W,
  parameter int ADDR_W     = $clog2(MAX_NODES * EMB_DIM),
  parameter int QC_W       = $clog2(gengnn_pkg::QUEUE_DEPTH + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [NODE_W-1:0]    num_nodes,
  input  logic [EDGE_W-1:0]    num_edges,
  input  logic                 vn_en,
  output logic                 busy,
  output logic                 done,
  output logic [31:0]          cycles,
  // node feature stream
  input  logic                 nf_valid,
  output logic                 nf_ready,
  output logic                 feat_we,
  output logic [ADDR_W-1:0]    feat_waddr,
  // converter
  output logic                 conv_start,
  input  logic                 conv_done,
  // message buffers
  input  logic                 mb_init_busy,
  output logic                 rd_bank,
  // NE PE
  output logic                 ne_start,
  output gengnn_pkg::ne_mode_e ne_mode,
  output logic [LAYER_W-1:0]   ne_layer,
  output logic                 ne_push_en,
  output logic                 ne_last_layer,
  input  logic                 ne_done,
  // MP PE and queue
  output logic [LAYER_W-1:0]   mp_edge_layer,
  input  logic                 mp_busy,
  input  logic [QC_W-1:0]      q_count,
  // head
  output logic                 head_clear,
  output logic                 head_start,
  input  logic                 head_done,
  // configuration seen by the datapath
  output logic [NODE_W-1:0]    tot_nodes,
  output logic [NODE_W-1:0]    orig_nodes,
  output logic                 vn_q
);
  import gengnn_pkg::*;

  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_PASS, S_WAIT, S_SETTLE, S_HEAD, S_HEADW} state_e;
  state_e state;

  logic [ADDR_W:0]      feat_cnt, feat_tot;
  logic                 conv_seen, ne_seen, prologue;
  logic [LAYER_W-1:0]   layer;
  logic [1:0]           settle;

  assign tot_nodes   = orig_nodes + NODE_W'(vn_q);
  assign feat_tot    = (ADDR_W + 1)'(32'(tot_nodes) * EMB_DIM);
  assign nf_ready    = (state == S_LOAD) && (feat_cnt < feat_tot);
  assign feat_we     = nf_valid && nf_ready;
  assign feat_waddr  = feat_cnt[ADDR_W-1:0];
  assign busy        = (state != S_IDLE);

  assign ne_mode       = prologue ? NE_BYPASS : NE_COMPUTE;
  assign ne_layer      = layer;
  assign ne_last_layer = !prologue && (layer == LAYER_W'(NUM_LAYERS - 1));
  assign ne_push_en    = !ne_last_layer;
  assign mp_edge_layer = prologue ? '0 : layer + 1'b1;
  // prologue writes buffer 0 (reads "1"); layer l reads buffer l%2
  assign rd_bank       = prologue ? 1'b1 : layer[0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; done <= 1'b0; cycles <= '0; feat_cnt <= '0; conv_seen <= 1'b0;
      ne_seen <= 1'b0; prologue <= 1'b0; layer <= '0; settle <= '0;
      conv_start <= 1'b0; ne_start <= 1'b0; head_clear <= 1'b0; head_start <= 1'b0;
      orig_nodes <= '0; vn_q <= 1'b0;
    end else begin
      done <= 1'b0; conv_start <= 1'b0; ne_start <= 1'b0; head_clear <= 1'b0; head_start <= 1'b0;
      if (busy) cycles <= cycles + 1;
      if (conv_done) conv_seen <= 1'b1;
      if (ne_done)   ne_seen   <= 1'b1;
      unique case (state)
        S_IDLE: if (start && !mb_init_busy) begin
          orig_nodes <= num_nodes; vn_q <= vn_en;
          feat_cnt <= '0; conv_seen <= 1'b0; cycles <= '0;
          conv_start <= 1'b1; head_clear <= 1'b1;
          state <= S_LOAD;
        end
        S_LOAD: begin
          if (feat_we) feat_cnt <= feat_cnt + 1'b1;
          if (conv_seen && feat_cnt == feat_tot) begin
            prologue <= 1'b1; layer <= '0;
            state <= S_PASS;
          end
        end
        S_PASS: begin
          ne_start <= 1'b1; ne_seen <= 1'b0;
          state <= S_WAIT;
        end
        S_WAIT: if (ne_seen && q_count == '0 && !mp_busy && !ne_start) begin
          settle <= '0;
          state  <= S_SETTLE;
        end
        S_SETTLE: begin
          settle <= settle + 1'b1;
          if (settle == 2'd2) begin
            if (prologue) begin
              prologue <= 1'b0; state <= S_PASS;
            end else if (layer == LAYER_W'(NUM_LAYERS - 1)) begin
              state <= S_HEAD;
            end else begin
              layer <= layer + 1'b1; state <= S_PASS;
            end
          end
        end
        S_HEAD: begin head_start <= 1'b1; state <= S_HEADW; end
        S_HEADW: if (head_done) begin done <= 1'b1; state <= S_IDLE; end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
