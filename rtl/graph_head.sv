// graph_head: global average pooling and the linear output layer.
//
// For graph-level tasks the final node embeddings are reduced to one graph
// embedding and mapped to the prediction. While the last GNN layer runs,
// every finished node's embedding (acc_valid/acc_vec) is added element-wise
// into EMB_DIM pooling registers, all elements in parallel, one node per
// beat. On start the head computes
//     mean[k] = sum[k] / n              one element per cycle, EMB_DIM cycles
//     out[t]  = sum_k W[t][k]*mean[k] + b[t]   one task per cycle, NUM_TASKS
// and pulses done. The division truncates toward zero. Global average
// pooling followed by one linear layer is the published GIN head; the
// element-serial schedule is this design's choice.
//
// clear zeroes the pooling registers (before each graph). Head weights are
// written through param_wr: PS_HEAD_W (row = task, vec) and PS_HEAD_B
// (row = task, vec[0]). out holds its value until the next start.
module graph_head #(
  parameter int EMB_DIM   = gengnn_pkg::EMB_DIM,
  parameter int NUM_TASKS = gengnn_pkg::NUM_TASKS,
  parameter int NODE_W    = gengnn_pkg::NODE_W
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  gengnn_pkg::param_wr_t param_wr,
  input  logic                  clear,
  input  logic                  acc_valid,
  input  gengnn_pkg::fx_t       acc_vec [EMB_DIM],
  input  logic                  start,
  input  logic [NODE_W-1:0]     num_nodes,
  output logic                  busy,
  output logic                  done,
  output gengnn_pkg::fx_t       out [NUM_TASKS]
);
  import gengnn_pkg::*;

  localparam int K_W = $clog2(EMB_DIM + 1);
  localparam int T_W = $clog2(NUM_TASKS + 1);
  typedef logic [EMB_DIM-1:0][DATA_W-1:0] vec_t;

  vec_t w_mem [NUM_TASKS];
  fx_t  b_mem [NUM_TASKS];
  always_ff @(posedge clk)
    if (param_wr.en) begin
      if (param_wr.sel == PS_HEAD_W) w_mem[T_W'(param_wr.row)] <= param_wr.vec[EMB_DIM-1:0];
      if (param_wr.sel == PS_HEAD_B) b_mem[T_W'(param_wr.row)] <= param_wr.vec[0];
    end

  typedef enum logic [1:0] {S_IDLE, S_DIV, S_LIN} state_e;
  state_e state;

  fx_t              sum  [EMB_DIM];
  fx_t              mean [EMB_DIM];
  logic [K_W-1:0]   k;
  logic [T_W-1:0]   t;
  logic [NODE_W-1:0] n_q;

  fx_t q_div;
  always_comb begin
    logic signed [DATA_W:0] n_s;
    n_s   = $signed({{(DATA_W + 1 - NODE_W){1'b0}}, n_q});
    q_div = fx_t'($signed({sum[k][DATA_W-1], sum[k]}) / n_s);
  end

  fx_t lin;
  always_comb begin
    lin = b_mem[t];
    for (int j = 0; j < EMB_DIM; j++) lin = lin + fx_mul(fx_t'(w_mem[t][j]), mean[j]);
  end

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; done <= 1'b0; k <= '0; t <= '0; n_q <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          n_q <= (num_nodes == '0) ? NODE_W'(1) : num_nodes;
          k <= '0; state <= S_DIV;
        end
        S_DIV: begin
          k <= k + 1'b1;
          if (k == K_W'(EMB_DIM - 1)) begin t <= '0; state <= S_LIN; end
        end
        S_LIN: begin
          t <= t + 1'b1;
          if (t == T_W'(NUM_TASKS - 1)) begin state <= S_IDLE; done <= 1'b1; end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (clear) begin
      for (int j = 0; j < EMB_DIM; j++) sum[j] <= '0;
    end else if (acc_valid) begin
      for (int j = 0; j < EMB_DIM; j++) sum[j] <= sum[j] + acc_vec[j];
    end
    if (state == S_DIV) mean[k] <= q_div;
    if (state == S_LIN) out[t] <= lin;
  end

endmodule
