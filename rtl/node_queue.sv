// node_queue: the streaming FIFO between the node embedding (NE) and the
// message passing (MP) PEs.
//
// As soon as the NE PE has produced a node's new embedding it pushes one
// entry {node id, embedding vector}; the MP PE pops entries whenever it is
// free. The queue therefore lets NE run ahead of MP on low-degree nodes and
// MP catch up on high-degree ones, instead of pairing them in lock step.
// The published depth is 10 nodes. Each entry is one wide word (WIDTH bits),
// so a whole node moves in a single beat.
//
// Standard valid/ready on both sides: a push happens on push_valid &&
// push_ready, a pop on pop_valid && pop_ready. pop_data is the head entry,
// valid whenever pop_valid is high (first-word fall-through). A push into a
// full queue is held off (push_ready low); that back-pressure is the only
// way the NE PE ever stalls on the MP PE. count gives the occupancy.
module node_queue #(
  parameter int DEPTH = gengnn_pkg::QUEUE_DEPTH,
  parameter int WIDTH = gengnn_pkg::NODE_W + gengnn_pkg::EMB_DIM * gengnn_pkg::DATA_W,
  parameter int CNT_W = $clog2(DEPTH + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push_valid,
  output logic             push_ready,
  input  logic [WIDTH-1:0] push_data,
  output logic             pop_valid,
  input  logic             pop_ready,
  output logic [WIDTH-1:0] pop_data,
  output logic [CNT_W-1:0] count
);

  localparam int PTR_W = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [PTR_W-1:0] wptr, rptr;
  logic             do_push, do_pop;

  assign push_ready = (count != CNT_W'(DEPTH));
  assign pop_valid  = (count != '0);
  assign pop_data   = mem[rptr];
  assign do_push    = push_valid && push_ready;
  assign do_pop     = pop_valid && pop_ready;

  function automatic logic [PTR_W-1:0] inc(logic [PTR_W-1:0] p);
    return (p == PTR_W'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (do_push) mem[wptr] <= push_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr <= '0; rptr <= '0; count <= '0;
    end else begin
      if (do_push) wptr <= inc(wptr);
      if (do_pop)  rptr <= inc(rptr);
      count <= count + CNT_W'(do_push) - CNT_W'(do_pop);
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) count <= CNT_W'(DEPTH));

endmodule
