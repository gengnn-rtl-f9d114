// node_emb_buffer: the global node embedding buffer, O(N) entries.
//
// Holds EMB_DIM fixed-point values for each of MAX_NODES nodes, stored
// node-major at address node*EMB_DIM + k. Following the paper, the buffer is
// deliberately left unpartitioned so that it scales with the number of
// nodes: one element is read and one element written per cycle. Model
// blocks that need a whole vector at once copy it into their own local
// buffers. Layers update it in place, node by node.
//
// One synchronous read port (data valid the cycle after the address) and
// one write port. A read of the address being written in the same cycle
// returns the old value. No reset; the host loads the input features.
module node_emb_buffer #(
  parameter int MAX_NODES = gengnn_pkg::MAX_NODES,
  parameter int EMB_DIM   = gengnn_pkg::EMB_DIM,
  parameter int DEPTH     = MAX_NODES * EMB_DIM,
  parameter int ADDR_W    = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              re,
  input  logic [ADDR_W-1:0] raddr,
  output gengnn_pkg::fx_t   rdata,
  input  logic              we,
  input  logic [ADDR_W-1:0] waddr,
  input  gengnn_pkg::fx_t   wdata
);

  gengnn_pkg::fx_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

endmodule
