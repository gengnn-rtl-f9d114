// mlp_pe: the customized two-layer MLP inside the node embedding PE.
//
// Computes, for one node,  y = act( W2 * relu(W1 * x + b1) + b2 ),
// x and y of EMB_DIM elements, hidden layer of HID = 2*EMB_DIM elements
// (the GIN MLP; batch normalisation is assumed folded into W/b offline).
// act is ReLU when relu_out is set (all but the last GNN layer), identity
// otherwise.
//
// Organisation (after the paper's MLP PE): the input and output vectors sit
// in fully partitioned local registers, so that all EMB_DIM multiplications
// that touch them happen in parallel; the hidden layer is not partitioned
// and is walked one element per cycle through a pipeline:
//   P0  read row h of W1 (and b1[h]) and column h of W2
//   P1  hidden[h] = relu(sum_k W1[h][k]*x[k] + b1[h])     EMB_DIM multipliers
//   P2  acc[o] += W2[o][h] * hidden[h] for every o          EMB_DIM multipliers
// One hidden element enters per cycle, so a node takes HID + 4 cycles from
// start to done. x is copied into the input register at start, so the
// caller may refill its own buffer while the MLP runs (ping-pong).
//
// Weights for every layer are held on chip and written through param_wr:
// PS_W1 (row h), PS_W2T (row h = column h of W2), PS_B1 (row h, vec[0]),
// PS_B2 (vec), each for param_wr.layer.
//
// Timing: pulse start (only when busy is low) with layer/relu_out/in_vec
// valid; done pulses one cycle when out_vec is valid; out_vec holds until
// the next start.
module mlp_pe #(
  parameter int EMB_DIM    = gengnn_pkg::EMB_DIM,
  parameter int NUM_LAYERS = gengnn_pkg::NUM_LAYERS,
  parameter int HID        = 2 * EMB_DIM,
  parameter int LAYER_W    = gengnn_pkg::LAYER_W
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  gengnn_pkg::param_wr_t    param_wr,
  input  logic                     start,
  input  logic [LAYER_W-1:0]       layer,
  input  logic                     relu_out,
  input  gengnn_pkg::fx_t          in_vec  [EMB_DIM],
  output logic                     busy,
  output logic                     done,
  output gengnn_pkg::fx_t          out_vec [EMB_DIM]
);
  import gengnn_pkg::*;

  localparam int ROWS  = NUM_LAYERS * HID;
  localparam int RA_W  = $clog2(ROWS);
  localparam int H_W   = $clog2(HID + 1);

  typedef logic [EMB_DIM-1:0][DATA_W-1:0] vec_t;

  vec_t w1_mem  [ROWS];
  vec_t w2t_mem [ROWS];
  fx_t  b1_mem  [ROWS];
  vec_t b2_mem  [NUM_LAYERS];

  // parameter writes
  logic [RA_W-1:0] wr_row;
  assign wr_row = RA_W'(32'(param_wr.layer) * HID + 32'(param_wr.row));
  always_ff @(posedge clk) begin
    if (param_wr.en) begin
      unique case (param_wr.sel)
        PS_W1:  w1_mem[wr_row]  <= param_wr.vec[EMB_DIM-1:0];
        PS_W2T: w2t_mem[wr_row] <= param_wr.vec[EMB_DIM-1:0];
        PS_B1:  b1_mem[wr_row]  <= param_wr.vec[0];
        PS_B2:  b2_mem[param_wr.layer] <= param_wr.vec[EMB_DIM-1:0];
        default: ;
      endcase
    end
  end

  // control
  logic [LAYER_W-1:0] layer_q;
  logic               relu_q;
  logic [H_W-1:0]     h;            // next hidden element to issue
  logic               issuing;
  logic               p1_valid, p2_valid, p1_last, p2_last, fin;
  fx_t                x_q   [EMB_DIM];
  fx_t                acc   [EMB_DIM];
  vec_t               w1_row, w2_row, w2_row_q;
  fx_t                b1_v, hid_q, hid_d;
  logic [RA_W-1:0]    rd_row;

  assign rd_row = RA_W'(32'(layer_q) * HID + 32'(h));
  assign busy   = issuing || p1_valid || p2_valid || fin;

  // P0: synchronous weight reads
  always_ff @(posedge clk) begin
    w1_row <= w1_mem[rd_row];
    w2_row <= w2t_mem[rd_row];
    b1_v   <= b1_mem[rd_row];
  end

  // P1: one hidden element, EMB_DIM products in parallel
  always_comb begin
    fx_t s;
    s = b1_v;
    for (int k = 0; k < EMB_DIM; k++) s = s + fx_mul(fx_t'(w1_row[k]), x_q[k]);
    hid_d = fx_relu(s);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      issuing <= 1'b0; p1_valid <= 1'b0; p2_valid <= 1'b0; p1_last <= 1'b0;
      p2_last <= 1'b0; fin <= 1'b0; done <= 1'b0; h <= '0; layer_q <= '0; relu_q <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        issuing <= 1'b1; h <= '0; layer_q <= layer; relu_q <= relu_out;
      end else if (issuing) begin
        h <= h + 1'b1;
        if (h == H_W'(HID - 1)) issuing <= 1'b0;
      end
      p1_valid <= issuing;
      p1_last  <= issuing && (h == H_W'(HID - 1));
      p2_valid <= p1_valid;
      p2_last  <= p1_last;
      fin      <= p2_last;
      done     <= fin;
    end
  end

  always_ff @(posedge clk) begin
    if (start && !busy) begin
      for (int k = 0; k < EMB_DIM; k++) begin
        x_q[k] <= in_vec[k];
        acc[k] <= '0;
      end
    end
    hid_q    <= hid_d;
    w2_row_q <= w2_row;
    // P2: accumulate into every output in parallel
    if (p2_valid)
      for (int o = 0; o < EMB_DIM; o++) acc[o] <= acc[o] + fx_mul(fx_t'(w2_row_q[o]), hid_q);
    if (fin)
      for (int o = 0; o < EMB_DIM; o++) begin
        fx_t y;
        y = acc[o] + fx_t'(b2_mem[layer_q][o]);
        out_vec[o] <= relu_q ? fx_relu(y) : y;
      end
  end

endmodule
