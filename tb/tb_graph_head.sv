// tb_graph_head: global average pooling and the linear head.
// Random node embeddings are accumulated (with a clear between graphs), the
// head is started and its outputs are compared with an independently
// computed mean (truncating division) and dot product in the same fixed
// point. The head must take EMB_DIM + NUM_TASKS + 1 cycles from start to
// done: one cycle to accept start, one per mean element, one per task.
module tb_graph_head;
  import gengnn_pkg::*;
  localparam int F = 5, T = 3, NODE_W = 6;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  param_wr_t param_wr;
  logic clear, acc_valid, start, busy, done;
  fx_t acc_vec [F];
  fx_t out [T];
  logic [NODE_W-1:0] num_nodes;

  graph_head #(.EMB_DIM(F), .NUM_TASKS(T), .NODE_W(NODE_W)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  function automatic int rnd(int range);
    return int'($urandom_range(2 * range - 1)) - range;
  endfunction
  function automatic int rmul(int a, int b);
    longint p;
    p = longint'(a) * longint'(b);
    return int'(p >>> FRAC_W);
  endfunction

  int W [T][F], B [T];

  initial begin
    int sum [F], mean [F], y, n, cyc, bad;
    param_wr = '0; clear = 0; acc_valid = 0; start = 0; num_nodes = '0;
    for (int k = 0; k < F; k++) acc_vec[k] = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < T; t++) begin
      @(negedge clk);
      param_wr = '0; param_wr.en = 1; param_wr.sel = PS_HEAD_W; param_wr.row = ROW_W'(t);
      for (int k = 0; k < F; k++) begin W[t][k] = rnd(70000); param_wr.vec[k] = W[t][k]; end
      @(negedge clk);
      param_wr = '0; param_wr.en = 1; param_wr.sel = PS_HEAD_B; param_wr.row = ROW_W'(t);
      B[t] = rnd(50000); param_wr.vec[0] = B[t];
      @(negedge clk); param_wr.en = 0;
    end
    for (int g = 0; g < 6; g++) begin
      n = (g == 0) ? 1 : $urandom_range(2, 40);
      @(negedge clk); clear = 1;
      @(negedge clk); clear = 0;
      for (int k = 0; k < F; k++) sum[k] = 0;
      for (int i = 0; i < n; i++) begin
        acc_valid = ($urandom_range(3) != 0);
        for (int k = 0; k < F; k++) acc_vec[k] = rnd(200000);
        if (!acc_valid) i--;
        else for (int k = 0; k < F; k++) sum[k] += acc_vec[k];
        @(negedge clk);
      end
      acc_valid = 0;
      num_nodes = NODE_W'(n); start = 1;
      @(negedge clk); start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      check(cyc == F + T + 1, $sformatf("graph %0d: head took %0d cycles, expected %0d", g, cyc, F + T + 1));
      for (int k = 0; k < F; k++) mean[k] = sum[k] / n;
      bad = 0;
      for (int t = 0; t < T; t++) begin
        y = B[t];
        for (int k = 0; k < F; k++) y += rmul(W[t][k], mean[k]);
        if (out[t] != y) begin
          bad++;
          $display("  graph %0d task %0d got %0d expected %0d", g, t, out[t], y);
        end
      end
      check(bad == 0, $sformatf("graph %0d (%0d nodes): %0d outputs wrong", g, n, bad));
      check(!busy, "busy after done");
    end
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
