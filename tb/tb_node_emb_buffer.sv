// tb_node_emb_buffer: fills the buffer with random values, checks reads,
// the one-cycle read latency, read-enable holding the output, and a read
// and a write of one address in the same cycle returning the old value.
module tb_node_emb_buffer;
  import gengnn_pkg::*;
  localparam int MAXN = 16, F = 6, DEPTH = MAXN * F, ADDR_W = $clog2(DEPTH);

  logic clk = 0;
  always #5 clk = ~clk;

  logic re, we;
  logic [ADDR_W-1:0] raddr, waddr;
  fx_t rdata, wdata;

  node_emb_buffer #(.MAX_NODES(MAXN), .EMB_DIM(F)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int model [DEPTH];

  initial begin
    re = 0; we = 0; raddr = '0; waddr = '0; wdata = '0;
    for (int a = 0; a < DEPTH; a++) begin
      model[a] = $urandom;
      @(negedge clk); we = 1; waddr = ADDR_W'(a); wdata = model[a];
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < 200; i++) begin
      int a;
      a = $urandom_range(DEPTH - 1);
      @(negedge clk); re = 1; raddr = ADDR_W'(a);
      @(negedge clk); re = 0;
      check(rdata == model[a], $sformatf("read %0d got %0d expected %0d", a, rdata, model[a]));
    end
    // output holds while re is low
    raddr = ADDR_W'(1);
    @(negedge clk);
    check(rdata != model[1] || model[1] == model[0], "output changed with re low");
    // read during write of the same address returns the old value
    @(negedge clk); re = 1; raddr = ADDR_W'(5); we = 1; waddr = ADDR_W'(5); wdata = 32'h1234_5678;
    @(negedge clk); re = 0; we = 0;
    check(rdata == model[5], "read-during-write returned the new value");
    model[5] = 32'h1234_5678;
    @(negedge clk); re = 1; raddr = ADDR_W'(5);
    @(negedge clk); re = 0;
    check(rdata == model[5], "written value not stored");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
