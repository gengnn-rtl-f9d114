// tb_mp_pe: the message passing PE with a behavioural CSR table and message
// buffer. A random graph (including a degree-0 node and one high-degree
// node) is stored in CSR form; node entries are offered in a shuffled order
// as a full queue would. Every accumulate request is added into a model
// buffer, which must end equal to the reference sum over all edges of
// relu(x_src + E[layer][attr]). The PE must take exactly
// 2 + deg*(EMB_DIM+2) cycles per node when the queue never runs dry.
module tb_mp_pe;
  import gengnn_pkg::*;
  localparam int MAXN = 16, MAXE = 64, F = 4, L = 2, ET = 4, LAYER_W = 2;
  localparam int NODE_W = $clog2(MAXN + 1), EDGE_W = $clog2(MAXE + 1), ATTR_W = $clog2(ET);
  localparam int ADDR_W = $clog2(MAXN * F), Q_W = NODE_W + F * 32;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  param_wr_t param_wr;
  logic [LAYER_W-1:0] edge_layer;
  logic pop_valid, pop_ready, acc_en, busy;
  logic [Q_W-1:0] pop_data;
  logic [NODE_W-1:0] node_raddr, nbr_rdata;
  logic [EDGE_W-1:0] deg_rdata, off_rdata, edge_raddr;
  logic [ATTR_W-1:0] attr_rdata;
  logic [ADDR_W-1:0] acc_addr;
  fx_t acc_val;
  logic [31:0] edges_done;

  mp_pe #(.MAX_NODES(MAXN), .MAX_EDGES(MAXE), .EMB_DIM(F), .NUM_LAYERS(L), .EDGE_TYPES(ET),
          .LAYER_W(LAYER_W)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  function automatic int rnd(int range);
    return int'($urandom_range(2 * range - 1)) - range;
  endfunction

  // behavioural CSR table and message buffer
  int deg [MAXN], off [MAXN], nbr [MAXE], att [MAXE];
  int msg [MAXN * F];
  always @(posedge clk) begin
    deg_rdata  <= EDGE_W'(deg[node_raddr]);
    off_rdata  <= EDGE_W'(off[node_raddr]);
    nbr_rdata  <= NODE_W'(nbr[edge_raddr]);
    attr_rdata <= ATTR_W'(att[edge_raddr]);
    if (acc_en) msg[acc_addr] += acc_val;
  end

  // node queue model
  logic [Q_W-1:0] q [$];
  assign pop_valid = (q.size() != 0);
  assign pop_data  = pop_valid ? q[0] : '0;
  logic popped = 0;
  always @(posedge clk) popped <= pop_valid && pop_ready;
  always @(negedge clk) if (popped) void'(q.pop_front());

  int EE [L][ET][F], x [MAXN][F];

  initial begin
    int n, p, v [F], order [$], cyc, exp_cyc, bad, m;
    param_wr = '0; edge_layer = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int l = 0; l < L; l++) for (int a = 0; a < ET; a++) begin
      for (int k = 0; k < F; k++) begin EE[l][a][k] = rnd(50000); v[k] = EE[l][a][k]; end
      @(negedge clk);
      param_wr = '0; param_wr.en = 1; param_wr.sel = PS_EDGE; param_wr.layer = LAYER_W'(l);
      param_wr.row = ROW_W'(a);
      for (int k = 0; k < F; k++) param_wr.vec[k] = v[k];
      @(negedge clk); param_wr.en = 0;
    end
    for (int layer = 0; layer < L; layer++) begin
      // random CSR graph: node 3 has degree 0, node 0 has degree 12
      n = 10; p = 0;
      for (int u = 0; u < n; u++) begin
        deg[u] = (u == 3) ? 0 : (u == 0) ? 12 : $urandom_range(1, 4);
        off[u] = p;
        for (int i = 0; i < deg[u]; i++) begin
          nbr[p] = $urandom_range(n - 1); att[p] = $urandom_range(ET - 1); p++;
        end
        for (int k = 0; k < F; k++) x[u][k] = rnd(80000);
      end
      m = p;
      for (int a = 0; a < MAXN * F; a++) msg[a] = 0;
      edge_layer = LAYER_W'(layer);
      // shuffled processing order
      order.delete();
      for (int u = 0; u < n; u++) order.push_back(u);
      order.shuffle();
      exp_cyc = 0;
      @(negedge clk);
      foreach (order[i]) begin
        logic [Q_W-1:0] e;
        e = '0;
        e[Q_W-1 -: NODE_W] = NODE_W'(order[i]);
        for (int k = 0; k < F; k++) e[k*32 +: 32] = x[order[i]][k];
        q.push_back(e);
        exp_cyc += 2 + deg[order[i]] * (F + 2);
      end
      cyc = 0;
      @(negedge clk); cyc++;
      while (busy || q.size() != 0) begin @(negedge clk); cyc++; end
      check(cyc == exp_cyc, $sformatf("layer %0d: %0d cycles, expected %0d", layer, cyc, exp_cyc));
      // reference
      bad = 0;
      for (int u = 0; u < n; u++) for (int k = 0; k < F; k++) begin
        int s;
        s = 0;
        for (int src = 0; src < n; src++)
          for (int e2 = off[src]; e2 < off[src] + deg[src]; e2++)
            if (nbr[e2] == u) begin
              int t;
              t = x[src][k] + EE[layer][att[e2]][k];
              s += (t < 0) ? 0 : t;
            end
        if (msg[u * F + k] != s) begin
          bad++;
          if (bad < 4) $display("  node %0d elem %0d got %0d expected %0d", u, k, msg[u * F + k], s);
        end
      end
      check(bad == 0, $sformatf("layer %0d: %0d message elements wrong", layer, bad));
      if (layer == 0) check(int'(edges_done) == m, $sformatf("edge counter %0d, expected %0d", edges_done, m));
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
