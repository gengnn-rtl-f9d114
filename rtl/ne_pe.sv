// ne_pe: node embedding PE, GIN flavour.
//
// For each node v, in processing order, it computes the GIN update
//     x_v <- MLP_l( (1 + eps_l) * x_v + m_v )
// where m_v is the message aggregated for v in the read-only message buffer
// and x_v the embedding in the node embedding buffer. The new embedding is
// written back in place and pushed, with v's id, into the node queue so that
// the message passing PE can scatter it. In BYPASS mode the stored embedding
// is pushed unchanged; this is the initial scatter of the input features
// that precedes the first layer.
//
// Three stages overlap, each working on a different node:
//   load   copies x_v and m_v (one element per cycle from the unpartitioned
//          buffers; the message element is cleared as it is read) into a
//          staging register and forms (1+eps)x + m              EMB_DIM+1 cycles
//   mlp    the MLP PE, which takes the staging register in one cycle, so the
//          load stage can fetch the next node meanwhile (ping-pong)  2*EMB_DIM+4
//   write  copies the result to the buffer (one element per cycle), pushes it
//          into the node queue (stalls while the queue is full) and, in the
//          last layer, hands it to the global pooling
// so in steady state a node leaves every 2*EMB_DIM+5 cycles or so.
// The MLP PE with partitioned local buffers and ping-pong copy follows the
// paper; the exact stage split and cycle counts are this design's.
//
// Processing order is node 0..N-1; with vn_en the virtual node (id N-1 of
// the N nodes given, i.e. the one appended last) is processed first so that
// its long message passing overlaps the other nodes' embedding.
//
// Interface: pulse cmd_start with mode/layer/num_nodes/vn_en/push_en/
// last_layer stable for the whole run; done pulses once every node has been
// written and pushed.
module ne_pe #(
  parameter int MAX_NODES  = gengnn_pkg::MAX_NODES,
  parameter int EMB_DIM    = gengnn_pkg::EMB_DIM,
  parameter int NUM_LAYERS = gengnn_pkg::NUM_LAYERS,
  parameter int NODE_W     = $clog2(MAX_NODES + 1),
  parameter int LAYER_W    = gengnn_pkg::LAYER_W,
  parameter int ADDR_W     = $clog2(MAX_NODES * EMB_DIM),
  parameter int Q_W        = NODE_W + EMB_DIM * gengnn_pkg::DATA_W
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  gengnn_pkg::param_wr_t param_wr,
  // command
  input  logic                  cmd_start,
  input  gengnn_pkg::ne_mode_e  mode,
  input  logic [LAYER_W-1:0]    layer,
  input  logic [NODE_W-1:0]     num_nodes,
  input  logic                  vn_en,
  input  logic                  push_en,
  input  logic                  last_layer,
  output logic                  busy,
  output logic                  done,
  // node embedding buffer
  output logic                  nb_re,
  output logic [ADDR_W-1:0]     nb_raddr,
  input  gengnn_pkg::fx_t       nb_rdata,
  output logic                  nb_we,
  output logic [ADDR_W-1:0]     nb_waddr,
  output gengnn_pkg::fx_t       nb_wdata,
  // read-only message buffer (read and clear)
  output logic                  mb_rd_en,
  output logic [ADDR_W-1:0]     mb_rd_addr,
  input  gengnn_pkg::fx_t       mb_rd_data,
  // node queue
  output logic                  q_valid,
  input  logic                  q_ready,
  output logic [Q_W-1:0]        q_data,
  // to global pooling
  output logic                  pool_valid,
  output gengnn_pkg::fx_t       pool_vec [EMB_DIM]
);
  import gengnn_pkg::*;

  localparam int K_W = $clog2(EMB_DIM + 1);

  fx_t eps_mem [NUM_LAYERS];
  always_ff @(posedge clk)
    if (param_wr.en && param_wr.sel == PS_EPS) eps_mem[param_wr.layer] <= param_wr.vec[0];

  logic running, compute;
  assign compute = (mode == NE_COMPUTE);

  function automatic logic [NODE_W-1:0] order(logic [NODE_W-1:0] i);
    if (!vn_en) return i;
    return (i == '0) ? num_nodes - 1'b1 : i - 1'b1;
  endfunction

  // ---------------- load stage ----------------
  logic [NODE_W-1:0] ld_idx;          // next node index (processing order)
  logic              ld_act;          // issuing reads
  logic [K_W-1:0]    ld_k;
  logic              ld_dv;           // read data valid this cycle
  logic [K_W-1:0]    ld_kd;
  logic [NODE_W-1:0] ld_node;
  fx_t               stg [EMB_DIM];
  logic              stg_full;
  logic [NODE_W-1:0] stg_node;
  fx_t               eps_l;
  logic              stg_take;        // staging register consumed this cycle

  assign eps_l      = eps_mem[layer];
  assign nb_re      = ld_act;
  assign nb_raddr   = ADDR_W'(32'(ld_node) * EMB_DIM + 32'(ld_k));
  assign mb_rd_en   = ld_act && compute;
  assign mb_rd_addr = nb_raddr;

  // ---------------- mlp stage ----------------
  logic              mlp_start, mlp_busy, mlp_done;
  fx_t               mlp_out [EMB_DIM];
  logic [NODE_W-1:0] mlp_node;
  logic              mlp_pend;        // result waiting to move to the write stage

  mlp_pe #(.EMB_DIM(EMB_DIM), .NUM_LAYERS(NUM_LAYERS), .LAYER_W(LAYER_W)) u_mlp (
    .clk, .rst_n, .param_wr,
    .start(mlp_start), .layer, .relu_out(!last_layer), .in_vec(stg),
    .busy(mlp_busy), .done(mlp_done), .out_vec(mlp_out)
  );

  // ---------------- write stage ----------------
  fx_t               wr_vec [EMB_DIM];
  logic              wr_full, wr_pushed, wr_written;
  logic [NODE_W-1:0] wr_node;
  logic [K_W-1:0]    wr_k;
  logic [NODE_W-1:0] n_done;
  logic              wr_load;         // write stage takes a new node this cycle
  logic              wr_bypass_take, wr_mlp_take;

  assign mlp_start      = running && compute && stg_full && !mlp_busy && !mlp_done && !mlp_pend;
  assign wr_bypass_take = running && !compute && stg_full && !wr_full;
  assign wr_mlp_take    = mlp_pend && !wr_full;
  assign wr_load        = wr_bypass_take || wr_mlp_take;
  assign stg_take       = mlp_start || wr_bypass_take;

  assign q_valid   = wr_full && push_en && !wr_pushed;
  always_comb begin
    q_data = '0;
    q_data[Q_W-1 -: NODE_W] = wr_node;
    for (int k = 0; k < EMB_DIM; k++) q_data[k*DATA_W +: DATA_W] = wr_vec[k];
  end
  assign nb_we    = wr_full && compute && !wr_written;
  assign nb_waddr = ADDR_W'(32'(wr_node) * EMB_DIM + 32'(wr_k));
  assign nb_wdata = wr_vec[wr_k];
  assign pool_vec = wr_vec;

  logic wr_fin;
  assign wr_fin = wr_full && (wr_pushed || !push_en || q_ready)
                          && (wr_written || !compute || (wr_k == K_W'(EMB_DIM - 1)));

  assign busy = running;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0; done <= 1'b0; ld_idx <= '0; ld_act <= 1'b0; ld_k <= '0;
      ld_dv <= 1'b0; ld_kd <= '0; ld_node <= '0; stg_full <= 1'b0; stg_node <= '0;
      mlp_pend <= 1'b0; mlp_node <= '0; wr_full <= 1'b0; wr_pushed <= 1'b0;
      wr_written <= 1'b0; wr_node <= '0; wr_k <= '0; n_done <= '0; pool_valid <= 1'b0;
    end else begin
      done       <= 1'b0;
      pool_valid <= 1'b0;
      if (cmd_start && !running) begin
        running <= 1'b1; ld_idx <= '0; n_done <= '0;
      end
      // load
      ld_dv <= ld_act;
      ld_kd <= ld_k;
      if (running && !ld_act && !ld_dv && !stg_full && ld_idx != num_nodes) begin
        ld_act  <= 1'b1;
        ld_k    <= '0;
        ld_node <= order(ld_idx);
        ld_idx  <= ld_idx + 1'b1;
      end else if (ld_act) begin
        ld_k <= ld_k + 1'b1;
        if (ld_k == K_W'(EMB_DIM - 1)) ld_act <= 1'b0;
      end
      if (ld_dv && ld_kd == K_W'(EMB_DIM - 1)) begin
        stg_full <= 1'b1;
        stg_node <= ld_node;
      end else if (stg_take) begin
        stg_full <= 1'b0;
      end
      // mlp
      if (mlp_start) mlp_node <= stg_node;
      if (mlp_done) mlp_pend <= 1'b1;
      else if (wr_mlp_take) mlp_pend <= 1'b0;
      // write
      if (wr_load) begin
        wr_full <= 1'b1; wr_pushed <= 1'b0; wr_written <= 1'b0; wr_k <= '0;
        wr_node <= wr_mlp_take ? mlp_node : stg_node;
      end else if (wr_full) begin
        if (q_valid && q_ready) wr_pushed <= 1'b1;
        if (nb_we) begin
          wr_k <= wr_k + 1'b1;
          if (wr_k == K_W'(EMB_DIM - 1)) wr_written <= 1'b1;
        end
        if (wr_fin) begin
          wr_full <= 1'b0;
          n_done  <= n_done + 1'b1;
          pool_valid <= last_layer && !(vn_en && wr_node == num_nodes - 1'b1);
          if (n_done == num_nodes - 1'b1) begin
            running <= 1'b0;
            done    <= 1'b1;
          end
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (ld_dv)
      stg[ld_kd] <= compute ? nb_rdata + fx_mul(eps_l, nb_rdata) + mb_rd_data : nb_rdata;
    if (wr_load)
      for (int k = 0; k < EMB_DIM; k++) wr_vec[k] <= wr_mlp_take ? mlp_out[k] : stg[k];
  end

  a_stage_order: assert property (@(posedge clk) disable iff (!rst_n)
    mlp_done |-> !mlp_pend);

endmodule
