// tb_node_queue: random push/pop traffic against a queue model at the
// published depth of 10 entries. Checks data order, that the queue
// accepts exactly 10 entries before push_ready drops, that it holds off
// pushes while full, the count output, and first-word fall-through
// (data of a pushed entry is poppable in the next cycle).
module tb_node_queue;
  localparam int DEPTH = 10, WIDTH = 40;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic push_valid, push_ready, pop_valid, pop_ready;
  logic [WIDTH-1:0] push_data, pop_data;
  logic [$clog2(DEPTH+1)-1:0] count;

  node_queue #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [WIDTH-1:0] model [$];
  int full_seen = 0, pushed = 0, popped = 0;

  initial begin
    push_valid = 0; pop_ready = 0; push_data = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    // fill to the top without popping
    for (int i = 0; i < DEPTH + 3; i++) begin
      @(negedge clk);
      push_valid = 1; push_data = {$urandom, 8'(i)};
      #1;
      if (i < DEPTH) check(push_ready, $sformatf("push %0d refused below depth", i));
      else           check(!push_ready, $sformatf("push %0d accepted above depth", i));
      if (push_ready) model.push_back(push_data);
    end
    @(negedge clk); push_valid = 0;
    check(count == DEPTH, $sformatf("count %0d when full", count));
    // random traffic
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      push_valid = ($urandom_range(99) < 55);
      push_data  = {$urandom, 8'(cyc)};
      pop_ready  = ($urandom_range(99) < 50);
      #1;
      check(int'(count) == model.size(), "count mismatch");
      check(pop_valid == (model.size() != 0), "pop_valid mismatch");
      check(push_ready == (model.size() < DEPTH), "push_ready mismatch");
      if (!push_ready) full_seen++;
      if (pop_valid && pop_ready) begin
        check(pop_data == model[0], "pop data order");
        void'(model.pop_front());
        popped++;
      end
      if (push_valid && push_ready) begin model.push_back(push_data); pushed++; end
    end
    // fall-through: empty the queue, push one, see it the next cycle
    @(negedge clk); push_valid = 0; pop_ready = 1;
    while (pop_valid) @(negedge clk);
    model.delete();
    push_valid = 1; push_data = 40'hAB_CDEF_0123; pop_ready = 0;
    @(negedge clk); push_valid = 0;
    check(pop_valid && pop_data == 40'hAB_CDEF_0123, "pushed entry not visible next cycle");
    $display("pushed=%0d popped=%0d full-cycles=%0d", pushed, popped, full_seen);
    check(full_seen > 0 && popped > 500, "traffic did not exercise full queue");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
