// tb_coo_to_csr: checks the COO-to-CSR converter together with the CSR
// table it fills.
//   1. the four-node example graph of the CSR illustration: degree table
//      2 3 0 1, neighbor table 1 3 | 0 2 3 | - | 2
//   2. the same graph with a virtual node appended (node 4, linked both
//      ways to every node, attribute = all ones)
//   3. a random 40-node, 150-edge graph; each node's slice must list its
//      destinations in arrival order with their attributes
// It also checks the conversion time, 2N + 2M (+2N virtual edges) plus a
// few cycles, and that edges are accepted one per cycle after the clear.
module tb_coo_to_csr;
  localparam int MAXN = 64, MAXE = 256;
  localparam int NODE_W = $clog2(MAXN + 1), EDGE_W = $clog2(MAXE + 1), ATTR_W = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, vn_en, e_valid, e_ready, busy, done;
  logic [NODE_W-1:0] num_nodes, e_src, e_dst, tot_nodes;
  logic [EDGE_W-1:0] num_edges, tot_edges;
  logic [ATTR_W-1:0] e_attr;
  logic node_we, edge_we;
  logic [NODE_W-1:0] node_waddr, nbr_wdata, node_raddr, nbr_rdata;
  logic [EDGE_W-1:0] deg_wdata, off_wdata, edge_waddr, deg_rdata, off_rdata, edge_raddr;
  logic [ATTR_W-1:0] attr_wdata, attr_rdata;

  coo_to_csr #(.MAX_NODES(MAXN), .MAX_EDGES(MAXE), .ATTR_W(ATTR_W)) dut (
    .clk, .rst_n, .start, .num_nodes, .num_edges, .vn_en, .e_valid, .e_ready, .e_src, .e_dst,
    .e_attr, .node_we, .node_waddr, .deg_wdata, .off_wdata, .edge_we, .edge_waddr, .nbr_wdata,
    .attr_wdata, .busy, .done, .tot_nodes, .tot_edges);
  csr_table #(.MAX_NODES(MAXN), .MAX_EDGES(MAXE), .ATTR_W(ATTR_W)) tbl (
    .clk, .node_we, .node_waddr, .deg_wdata, .off_wdata, .edge_we, .edge_waddr,
    .nbr_wdata, .attr_wdata, .node_raddr, .deg_rdata, .off_rdata, .edge_raddr,
    .nbr_rdata, .attr_rdata);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int es [$], ed [$], ea [$];

  task automatic convert(int n, bit vn, output int cyc);
    int stalls;
    stalls = 0;
    @(negedge clk);
    num_nodes = NODE_W'(n); num_edges = EDGE_W'(es.size()); vn_en = vn; start = 1;
    @(negedge clk); start = 0;
    cyc = 1;
    foreach (es[i]) begin
      e_valid = 1; e_src = NODE_W'(es[i]); e_dst = NODE_W'(ed[i]); e_attr = ATTR_W'(ea[i]);
      @(posedge clk); cyc++;
      while (!e_ready) begin @(posedge clk); cyc++; stalls++; end
      #1;
    end
    e_valid = 0;
    while (!done) begin @(posedge clk); cyc++; end
    check(stalls <= n + 2, $sformatf("edge input stalled %0d cycles (only the clear phase may)", stalls));
  endtask

  task automatic read_node(int v, output int d, output int o);
    @(negedge clk); node_raddr = NODE_W'(v);
    @(negedge clk); d = int'(deg_rdata); o = int'(off_rdata);
  endtask
  task automatic read_edge(int p, output int nb, output int at);
    @(negedge clk); edge_raddr = EDGE_W'(p);
    @(negedge clk); nb = int'(nbr_rdata); at = int'(attr_rdata);
  endtask

  // expected CSR from the edge list (slices keep arrival order)
  task automatic verify(int n, bit vn, string name);
    int nt, d, o, nb, at, p, exp_deg, bad;
    int as_ [$], ad_ [$], aa_ [$];
    as_ = es; ad_ = ed; aa_ = ea;
    if (vn) for (int v = 0; v < n; v++) begin
      as_.push_back(n); ad_.push_back(v); aa_.push_back(15);
      as_.push_back(v); ad_.push_back(n); aa_.push_back(15);
    end
    nt = n + int'(vn);
    check(int'(tot_nodes) == nt && int'(tot_edges) == as_.size(),
          $sformatf("%s totals %0d/%0d", name, tot_nodes, tot_edges));
    p = 0; bad = 0;
    for (int v = 0; v < nt; v++) begin
      read_node(v, d, o);
      exp_deg = 0;
      foreach (as_[i]) if (as_[i] == v) exp_deg++;
      check(d == exp_deg && o == p, $sformatf("%s node %0d deg %0d off %0d, expected %0d %0d", name, v, d, o, exp_deg, p));
      foreach (as_[i]) if (as_[i] == v) begin
        read_edge(p, nb, at);
        if (nb != ad_[i] || at != aa_[i]) begin
          bad++;
          $display("  %s slot %0d: %0d/%0d expected %0d/%0d", name, p, nb, at, ad_[i], aa_[i]);
        end
        p++;
      end
    end
    check(bad == 0, $sformatf("%s: %0d neighbor-table entries wrong", name, bad));
  endtask

  initial begin
    int cyc, d, o, nb, at;
    int deg_t [4] = '{2, 3, 0, 1};
    int nbr_t [6] = '{1, 3, 0, 2, 3, 2};
    int q [$];
    start = 0; vn_en = 0; e_valid = 0; e_src = '0; e_dst = '0; e_attr = '0;
    num_nodes = '0; num_edges = '0; node_raddr = '0; edge_raddr = '0;
    repeat (3) @(posedge clk); rst_n = 1;

    // 1. example graph, edges given in an arbitrary order
    es = '{3, 1, 0, 1, 0, 1}; ed = '{2, 0, 1, 2, 3, 3}; ea = '{0, 1, 2, 3, 4, 5};
    convert(4, 0, cyc);
    for (int v = 0; v < 4; v++) begin
      read_node(v, d, o);
      check(d == deg_t[v], $sformatf("example degree[%0d]=%0d expected %0d", v, d, deg_t[v]));
    end
    // the published table lists each slice in ascending order; ours keeps
    // arrival order, so compare each slice sorted
    q.delete();
    for (int p = 0; p < 6; p++) begin read_edge(p, nb, at); q.push_back(nb); end
    begin
      int s0 [$], s1 [$];
      s0 = q[0:1]; s1 = q[2:4];
      s0.sort(); s1.sort();
      q = {s0, s1, q[5]};
    end
    for (int p = 0; p < 6; p++)
      check(q[p] == nbr_t[p], $sformatf("example neighbor[%0d]=%0d expected %0d", p, q[p], nbr_t[p]));
    verify(4, 0, "example");
    check(cyc <= 2 * 4 + 2 * 6 + 5, $sformatf("example conversion took %0d cycles", cyc));

    // 2. with a virtual node
    convert(4, 1, cyc);
    verify(4, 1, "example+vn");
    check(cyc <= 2 * 5 + 2 * (6 + 8) + 5, $sformatf("vn conversion took %0d cycles", cyc));

    // 3. random graph
    es.delete(); ed.delete(); ea.delete();
    for (int i = 0; i < 150; i++) begin
      es.push_back($urandom_range(39)); ed.push_back($urandom_range(39)); ea.push_back($urandom_range(14));
    end
    convert(40, 0, cyc);
    verify(40, 0, "random");
    check(cyc <= 2 * 40 + 2 * 150 + 5, $sformatf("random conversion took %0d cycles", cyc));
    $display("random conversion: %0d cycles for N=40 M=150", cyc);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
