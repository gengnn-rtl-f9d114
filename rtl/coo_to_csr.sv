// coo_to_csr: on-chip converter from the raw COO edge list to CSR.
//
// Graphs arrive as an unordered list of (source, destination, attribute)
// edges. The converter runs once per graph, while the graph streams in, and
// its result is reused by every GNN layer. It works in four phases:
//   CLEAR    zero the per-node edge counters               (N cycles)
//   COLLECT  accept one edge per cycle, keep it in a local edge store and
//            count it against its source node               (M cycles)
//            then, if vn_en, append a virtual node with id N and a pair of
//            edges N->v, v->N for every node v, attribute VN_ATTR (2N cycles)
//   PREFIX   running sum of the counts gives each node's first slot;
//            degree and offset are written to the CSR table (N cycles)
//   SCATTER  every stored edge is written into the next free slot of its
//            source node's slice of the neighbor table    (M cycles)
// Inside one node's slice, neighbors keep their arrival order.
// The converter itself, and its use of COO input, follow the paper; the
// four-phase counting-sort organisation and the virtual-node generation are
// this design's own realisation of it.
//
// Interface: pulse start with num_nodes/num_edges/vn_en stable; edges are
// taken on e_valid && e_ready. done is high for one cycle when the CSR
// table is complete; tot_nodes/tot_edges then hold the sizes including the
// virtual node and its edges.
module coo_to_csr #(
  parameter int MAX_NODES = gengnn_pkg::MAX_NODES,
  parameter int MAX_EDGES = gengnn_pkg::MAX_EDGES,
  parameter int NODE_W    = $clog2(MAX_NODES + 1),
  parameter int EDGE_W    = $clog2(MAX_EDGES + 1),
  parameter int ATTR_W    = gengnn_pkg::ATTR_W,
  parameter logic [ATTR_W-1:0] VN_ATTR = '1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [NODE_W-1:0] num_nodes,
  input  logic [EDGE_W-1:0] num_edges,
  input  logic              vn_en,
  // COO edge stream
  input  logic              e_valid,
  output logic              e_ready,
  input  logic [NODE_W-1:0] e_src,
  input  logic [NODE_W-1:0] e_dst,
  input  logic [ATTR_W-1:0] e_attr,
  // CSR table write ports
  output logic              node_we,
  output logic [NODE_W-1:0] node_waddr,
  output logic [EDGE_W-1:0] deg_wdata,
  output logic [EDGE_W-1:0] off_wdata,
  output logic              edge_we,
  output logic [EDGE_W-1:0] edge_waddr,
  output logic [NODE_W-1:0] nbr_wdata,
  output logic [ATTR_W-1:0] attr_wdata,
  // status
  output logic              busy,
  output logic              done,
  output logic [NODE_W-1:0] tot_nodes,
  output logic [EDGE_W-1:0] tot_edges
);

  typedef enum logic [2:0] {S_IDLE, S_CLEAR, S_COLLECT, S_VN, S_PREFIX, S_SCATTER, S_DONE} state_e;
  state_e state;

  logic [EDGE_W-1:0] cnt    [MAX_NODES];  // out-degree counters
  logic [EDGE_W-1:0] cursor [MAX_NODES];  // next free slot per node
  logic [NODE_W-1:0] st_src [MAX_EDGES];  // edge store
  logic [NODE_W-1:0] st_dst [MAX_EDGES];
  logic [ATTR_W-1:0] st_attr[MAX_EDGES];

  logic [NODE_W-1:0] n_orig;
  logic              vn_q;
  logic [EDGE_W-1:0] m_orig;
  logic [EDGE_W-1:0] eidx;     // edges stored / scattered so far
  logic [NODE_W-1:0] vidx;     // node index in CLEAR / VN / PREFIX
  logic              vn_half;  // which edge of the virtual pair is next
  logic [EDGE_W-1:0] run;      // running prefix sum

  assign tot_nodes = n_orig + NODE_W'(vn_q);
  assign busy      = (state != S_IDLE);
  assign e_ready   = (state == S_COLLECT) && (eidx < m_orig);

  // one edge entering the store this cycle
  logic              add_en;
  logic [NODE_W-1:0] add_src, add_dst;
  logic [ATTR_W-1:0] add_attr;
  always_comb begin
    add_en = 1'b0; add_src = '0; add_dst = '0; add_attr = '0;
    if (state == S_COLLECT && e_valid && e_ready) begin
      add_en = 1'b1; add_src = e_src; add_dst = e_dst; add_attr = e_attr;
    end else if (state == S_VN) begin
      add_en   = 1'b1;
      add_src  = vn_half ? vidx : n_orig;
      add_dst  = vn_half ? n_orig : vidx;
      add_attr = VN_ATTR;
    end
  end

  // CSR writes
  logic [EDGE_W-1:0] sc_pos;
  logic [NODE_W-1:0] sc_src;
  assign sc_src     = st_src[eidx];
  assign sc_pos     = cursor[sc_src];
  assign node_we    = (state == S_PREFIX);
  assign node_waddr = vidx;
  assign deg_wdata  = cnt[vidx];
  assign off_wdata  = run;
  assign edge_we    = (state == S_SCATTER);
  assign edge_waddr = sc_pos;
  assign nbr_wdata  = st_dst[eidx];
  assign attr_wdata = st_attr[eidx];

  always_ff @(posedge clk) begin
    if (add_en) begin
      st_src[eidx]  <= add_src;
      st_dst[eidx]  <= add_dst;
      st_attr[eidx] <= add_attr;
      cnt[add_src]  <= cnt[add_src] + 1'b1;
    end
    if (state == S_CLEAR) cnt[vidx] <= '0;
    if (state == S_PREFIX) cursor[vidx] <= run;
    if (state == S_SCATTER) cursor[sc_src] <= sc_pos + 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; done <= 1'b0; n_orig <= '0; m_orig <= '0; vn_q <= 1'b0;
      eidx <= '0; vidx <= '0; vn_half <= 1'b0; run <= '0; tot_edges <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          n_orig <= num_nodes; m_orig <= num_edges; vn_q <= vn_en;
          vidx <= '0; eidx <= '0; vn_half <= 1'b0;
          state <= S_CLEAR;
        end
        S_CLEAR: begin
          vidx <= vidx + 1'b1;
          if (vidx == tot_nodes - 1'b1) begin
            vidx <= '0;
            state <= S_COLLECT;
          end
        end
        S_COLLECT: begin
          if (add_en) eidx <= eidx + 1'b1;
          if (eidx == m_orig) state <= vn_q ? S_VN : S_PREFIX;
          if (eidx == m_orig && !vn_q) tot_edges <= eidx;
          run <= '0;
        end
        S_VN: begin
          eidx    <= eidx + 1'b1;
          vn_half <= ~vn_half;
          if (vn_half) begin
            vidx <= vidx + 1'b1;
            if (vidx == n_orig - 1'b1) begin
              vidx <= '0;
              tot_edges <= eidx + 1'b1;
              state <= S_PREFIX;
            end
          end
        end
        S_PREFIX: begin
          run  <= run + cnt[vidx];
          vidx <= vidx + 1'b1;
          if (vidx == tot_nodes - 1'b1) begin
            eidx  <= '0;
            state <= (tot_edges == '0) ? S_DONE : S_SCATTER;
          end
        end
        S_SCATTER: begin
          eidx <= eidx + 1'b1;
          if (eidx == tot_edges - 1'b1) state <= S_DONE;
        end
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end


  // capacity of the on-chip tables
  a_cap: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_IDLE && start) |->
      (32'(num_nodes) + 32'(vn_en) <= MAX_NODES) &&
      (32'(num_edges) + (vn_en ? 2*32'(num_nodes) : 0) <= MAX_EDGES));


endmodule
