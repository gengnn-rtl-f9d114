// csr_table: storage for one graph in compressed sparse row form.
//
// Four arrays, all written by the COO-to-CSR converter and read by the
// message passing PE:
//   deg[v]   out-degree of node v                       (degree table)
//   off[v]   index of v's first out-neighbor in nbr[]   (prefix sum of deg)
//   nbr[p]   row-major concatenation of out-neighbors    (neighbor table)
//   attr[p]  edge attribute of the edge stored at p      (edge-data table)
// The degree and neighbor tables and the separate edge-data array are the
// published CSR layout. The explicit offset array is this design's choice:
// it lets nodes be visited in any order (the virtual node is visited first),
// where a running sum of degrees would force ascending node order.
//
// Both read ports are synchronous: the address is sampled on a rising edge
// and the data is valid in the following cycle. Writes take effect at the
// rising edge. There is no reset: the converter rewrites every entry it
// later allows to be read.
module csr_table #(
  parameter int MAX_NODES = gengnn_pkg::MAX_NODES,
  parameter int MAX_EDGES = gengnn_pkg::MAX_EDGES,
  parameter int NODE_W    = $clog2(MAX_NODES + 1),
  parameter int EDGE_W    = $clog2(MAX_EDGES + 1),
  parameter int ATTR_W    = gengnn_pkg::ATTR_W
) (
  input  logic              clk,
  // node-table write (degree and offset of one node)
  input  logic              node_we,
  input  logic [NODE_W-1:0] node_waddr,
  input  logic [EDGE_W-1:0] deg_wdata,
  input  logic [EDGE_W-1:0] off_wdata,
  // edge-table write (neighbor and attribute at one position)
  input  logic              edge_we,
  input  logic [EDGE_W-1:0] edge_waddr,
  input  logic [NODE_W-1:0] nbr_wdata,
  input  logic [ATTR_W-1:0] attr_wdata,
  // node-table read
  input  logic [NODE_W-1:0] node_raddr,
  output logic [EDGE_W-1:0] deg_rdata,
  output logic [EDGE_W-1:0] off_rdata,
  // edge-table read
  input  logic [EDGE_W-1:0] edge_raddr,
  output logic [NODE_W-1:0] nbr_rdata,
  output logic [ATTR_W-1:0] attr_rdata
);

  logic [EDGE_W-1:0] deg_mem  [MAX_NODES];
  logic [EDGE_W-1:0] off_mem  [MAX_NODES];
  logic [NODE_W-1:0] nbr_mem  [MAX_EDGES];
  logic [ATTR_W-1:0] attr_mem [MAX_EDGES];

  always_ff @(posedge clk) begin
    if (node_we) begin
      deg_mem[node_waddr] <= deg_wdata;
      off_mem[node_waddr] <= off_wdata;
    end
    if (edge_we) begin
      nbr_mem[edge_waddr]  <= nbr_wdata;
      attr_mem[edge_waddr] <= attr_wdata;
    end
    deg_rdata  <= deg_mem[node_raddr];
    off_rdata  <= off_mem[node_raddr];
    nbr_rdata  <= nbr_mem[edge_raddr];
    attr_rdata <= attr_mem[edge_raddr];
  end

endmodule
