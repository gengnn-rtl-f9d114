// msg_buffers: the two O(N) message buffers and their layer-to-layer swap.
//
// Each buffer holds one aggregated (summed) message of EMB_DIM elements per
// node, node-major, one element per access. In every layer one buffer is
// read-only for the node embedding PE (it holds the messages gathered in
// the previous layer) while the other keeps accumulating the partial
// messages the message passing PE scatters; the next layer swaps the roles.
// `rd_bank` names the read-only buffer; the other is the accumulating one.
//
// Read side (gather): rd_en/rd_addr, data one cycle later. The element read
// is cleared to zero in the same cycle, so that once a layer has consumed a
// buffer it is ready to accumulate in the next layer. Read-and-clear is this
// design's choice; the paper does not say how a buffer is emptied.
//
// Accumulate side (scatter): acc_en/acc_addr/acc_val adds acc_val to the
// stored element. It is a two-stage read-modify-write that accepts one
// request per cycle; a request to the address written in the previous cycle
// takes the forwarded sum, so back-to-back requests to one address are safe.
//
// After reset both buffers are swept to zero (DEPTH cycles, init_busy high);
// no request may be made during the sweep.
module msg_buffers #(
  parameter int MAX_NODES = gengnn_pkg::MAX_NODES,
  parameter int EMB_DIM   = gengnn_pkg::EMB_DIM,
  parameter int DEPTH     = MAX_NODES * EMB_DIM,
  parameter int ADDR_W    = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              rd_bank,
  output logic              init_busy,
  // gather side: read and clear
  input  logic              rd_en,
  input  logic [ADDR_W-1:0] rd_addr,
  output gengnn_pkg::fx_t   rd_data,
  // scatter side: accumulate
  input  logic              acc_en,
  input  logic [ADDR_W-1:0] acc_addr,
  input  gengnn_pkg::fx_t   acc_val
);
  import gengnn_pkg::*;

  fx_t mem0 [DEPTH];
  fx_t mem1 [DEPTH];

  logic [ADDR_W-1:0] clr_addr;
  // stage 1 of the read-modify-write
  logic              s1_valid;
  logic [ADDR_W-1:0] s1_addr;
  fx_t               s1_val, s1_old;
  // last write, for forwarding
  logic              w_valid;
  logic [ADDR_W-1:0] w_addr;
  fx_t               w_data;
  fx_t               sum;

  assign sum = ((w_valid && w_addr == s1_addr) ? w_data : s1_old) + s1_val;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      init_busy <= 1'b1; clr_addr <= '0;
      s1_valid <= 1'b0; w_valid <= 1'b0;
    end else begin
      if (init_busy) begin
        clr_addr <= clr_addr + 1'b1;
        if (clr_addr == ADDR_W'(DEPTH - 1)) init_busy <= 1'b0;
      end
      s1_valid <= acc_en;
      w_valid  <= s1_valid;
    end
  end

  always_ff @(posedge clk) begin
    s1_addr <= acc_addr;
    s1_val  <= acc_val;
    s1_old  <= rd_bank ? mem0[acc_addr] : mem1[acc_addr];
    rd_data <= rd_bank ? mem1[rd_addr] : mem0[rd_addr];
    w_addr  <= s1_addr;
    w_data  <= sum;
    if (init_busy) begin
      mem0[clr_addr] <= '0;
      mem1[clr_addr] <= '0;
    end else begin
      // bank 0
      if (!rd_bank && rd_en)     mem0[rd_addr] <= '0;
      if (rd_bank && s1_valid)   mem0[s1_addr] <= sum;
      // bank 1
      if (rd_bank && rd_en)      mem1[rd_addr] <= '0;
      if (!rd_bank && s1_valid)  mem1[s1_addr] <= sum;
    end
  end

  a_no_req_in_init: assert property (@(posedge clk) disable iff (!rst_n)
    init_busy |-> !(rd_en || acc_en));

endmodule
