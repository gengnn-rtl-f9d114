// tb_gengnn_top: end-to-end test of the accelerator at reduced size.
//
// Loads random parameters, then runs three graphs through the whole flow
// (COO stream -> CSR, initial scatter, all GIN layers, pooling, head):
//   1. a random sparse graph
//   2. the same kind of graph with the virtual node enabled
//   3. a graph with one hub node of high out-degree, which makes message
//      passing slower than node embedding and fills the node queue
// Each prediction is compared bit-exactly with a reference model written
// here in plain SystemVerilog arithmetic. The test also counts how often
// the mechanisms of the design occurred (queue back-pressure, MP idle while
// NE works, NE/MLP overlap, message buffer swaps, bypass prologue, virtual
// node) and fails any that never did, and checks that each graph finished
// faster than NE and MP run back to back would.
module tb_gengnn_top;
  import gengnn_pkg::*;

  localparam int MAXN = 64, MAXE = 512, F = 8, L = 3, ET = 4, QD = 4, T = 2;
  localparam int HID = 2 * F;
  localparam int NODE_W = $clog2(MAXN + 1), EDGE_W = $clog2(MAXE + 1), ATTR_W = $clog2(ET);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  param_wr_t param_wr;
  logic init_busy, start, vn_en, nf_valid, nf_ready, e_valid, e_ready, busy, done;
  logic [NODE_W-1:0] num_nodes, e_src, e_dst;
  logic [EDGE_W-1:0] num_edges;
  logic [ATTR_W-1:0] e_attr;
  fx_t nf_data;
  fx_t result [T];
  logic [31:0] cycles;

  gengnn_top #(.MAX_NODES(MAXN), .MAX_EDGES(MAXE), .EMB_DIM(F), .NUM_LAYERS(L),
               .EDGE_TYPES(ET), .QUEUE_DEPTH(QD), .NUM_TASKS(T)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------- parameters ----------------
  int W1 [L][HID][F], W2 [L][F][HID], B1 [L][HID], B2 [L][F], EPS [L];
  int EE [L][ET][F], HW [T][F], HB [T];

  function automatic int rnd(int range);   // uniform in [-range, range)
    return int'($urandom_range(2 * range - 1)) - range;
  endfunction

  task automatic pw(param_sel_e sel, int layer, int row, int v [F]);
    @(negedge clk);
    param_wr = '0;
    param_wr.en = 1; param_wr.sel = sel; param_wr.layer = LAYER_W'(layer); param_wr.row = ROW_W'(row);
    for (int k = 0; k < F; k++) param_wr.vec[k] = v[k];
    @(negedge clk);
    param_wr.en = 0;
  endtask

  task automatic load_params();
    int v [F];
    for (int l = 0; l < L; l++) begin
      for (int h = 0; h < HID; h++) begin
        for (int k = 0; k < F; k++) begin W1[l][h][k] = rnd(20000); v[k] = W1[l][h][k]; end
        pw(PS_W1, l, h, v);
        for (int o = 0; o < F; o++) begin W2[l][o][h] = rnd(20000); v[o] = W2[l][o][h]; end
        pw(PS_W2T, l, h, v);
        B1[l][h] = rnd(8000); v = '{default: 0}; v[0] = B1[l][h];
        pw(PS_B1, l, h, v);
      end
      for (int o = 0; o < F; o++) begin B2[l][o] = rnd(8000); v[o] = B2[l][o]; end
      pw(PS_B2, l, 0, v);
      EPS[l] = rnd(30000); v = '{default: 0}; v[0] = EPS[l];
      pw(PS_EPS, l, 0, v);
      for (int a = 0; a < ET; a++) begin
        for (int k = 0; k < F; k++) begin EE[l][a][k] = rnd(40000); v[k] = EE[l][a][k]; end
        pw(PS_EDGE, l, a, v);
      end
    end
    for (int t = 0; t < T; t++) begin
      for (int k = 0; k < F; k++) begin HW[t][k] = rnd(30000); v[k] = HW[t][k]; end
      pw(PS_HEAD_W, 0, t, v);
      HB[t] = rnd(10000); v = '{default: 0}; v[0] = HB[t];
      pw(PS_HEAD_B, 0, t, v);
    end
  endtask

  // ---------------- reference model ----------------
  function automatic int rmul(int a, int b);
    longint p;
    p = longint'(a) * longint'(b);
    return int'(p >>> FRAC_W);
  endfunction
  function automatic int rrelu(int a);
    return (a < 0) ? 0 : a;
  endfunction

  int gx [MAXN][F];                 // input features
  int es [$], ed [$], ea [$];       // COO edges
  int ref_out [T];
  int ref_x [MAXN][F];               // final node embeddings

  task automatic reference(int n, bit vn);
    int nt, x [MAXN][F], m [MAXN][F], s [MAXN][F];
    int hsum [F], mean [F];
    int as_ [$], ad_ [$], aa_ [$];
    nt = n + int'(vn);
    as_ = es; ad_ = ed; aa_ = ea;
    if (vn) for (int v = 0; v < n; v++) begin
      as_.push_back(n); ad_.push_back(v); aa_.push_back(ET - 1);
      as_.push_back(v); ad_.push_back(n); aa_.push_back(ET - 1);
    end
    for (int v = 0; v < nt; v++) for (int k = 0; k < F; k++) x[v][k] = gx[v][k];
    // messages of layer 0
    for (int v = 0; v < nt; v++) for (int k = 0; k < F; k++) m[v][k] = 0;
    foreach (as_[e]) for (int k = 0; k < F; k++)
      m[ad_[e]][k] += rrelu(x[as_[e]][k] + EE[0][aa_[e]][k]);
    for (int l = 0; l < L; l++) begin
      for (int v = 0; v < nt; v++) begin
        int h [F], hid [HID], y;
        for (int k = 0; k < F; k++) h[k] = x[v][k] + rmul(EPS[l], x[v][k]) + m[v][k];
        for (int j = 0; j < HID; j++) begin
          hid[j] = B1[l][j];
          for (int k = 0; k < F; k++) hid[j] += rmul(W1[l][j][k], h[k]);
          hid[j] = rrelu(hid[j]);
        end
        for (int o = 0; o < F; o++) begin
          y = B2[l][o];
          for (int j = 0; j < HID; j++) y += rmul(W2[l][o][j], hid[j]);
          s[v][o] = (l == L - 1) ? y : rrelu(y);
        end
      end
      for (int v = 0; v < nt; v++) for (int k = 0; k < F; k++) begin x[v][k] = s[v][k]; m[v][k] = 0; end
      if (l < L - 1)
        foreach (as_[e]) for (int k = 0; k < F; k++)
          m[ad_[e]][k] += rrelu(x[as_[e]][k] + EE[l + 1][aa_[e]][k]);
    end
    for (int v = 0; v < nt; v++) for (int k = 0; k < F; k++) ref_x[v][k] = x[v][k];
    for (int k = 0; k < F; k++) begin
      hsum[k] = 0;
      for (int v = 0; v < n; v++) hsum[k] += x[v][k];
      mean[k] = hsum[k] / n;
    end
    for (int t = 0; t < T; t++) begin
      ref_out[t] = HB[t];
      for (int k = 0; k < F; k++) ref_out[t] += rmul(HW[t][k], mean[k]);
    end
  endtask

  // ---------------- mechanism counters ----------------
  int c_qfull = 0, c_mp_idle = 0, c_overlap = 0, c_swap = 0, c_prologue = 0, c_vn = 0, c_conv = 0;
  logic rd_bank_q;
  always @(posedge clk) if (rst_n) begin
    if (dut.q_push_valid && !dut.q_push_ready) c_qfull++;
    if (dut.ne_busy && !dut.mp_busy && dut.q_count == 0 && dut.ne_push_en) c_mp_idle++;
    if (dut.u_ne.ld_act && dut.u_ne.mlp_busy) c_overlap++;
    if (dut.ne_start && dut.ne_mode == NE_COMPUTE && dut.rd_bank != rd_bank_q) c_swap++;
    if (dut.ne_start) rd_bank_q <= dut.rd_bank;
    if (dut.ne_start && dut.ne_mode == NE_BYPASS) c_prologue++;
    if (dut.ne_start && dut.vn_q) c_vn++;
    if (dut.conv_done) c_conv++;
  end

  // ---------------- drive one graph ----------------
  task automatic run_graph(int n, bit vn, string name);
    int nt, deg [MAXN], ne_cyc, mp_cyc;
    nt = n + int'(vn);
    for (int v = 0; v < nt; v++) for (int k = 0; k < F; k++) gx[v][k] = rnd(65536);
    reference(n, vn);
    @(negedge clk);
    num_nodes = NODE_W'(n); num_edges = EDGE_W'(es.size()); vn_en = vn; start = 1;
    @(negedge clk);
    start = 0;
    fork
      begin
        for (int v = 0; v < nt; v++) for (int k = 0; k < F; k++) begin
          nf_valid = 1; nf_data = gx[v][k];
          @(posedge clk); while (!nf_ready) @(posedge clk);
          #1;
        end
        nf_valid = 0;
      end
      begin
        foreach (es[e]) begin
          e_valid = 1; e_src = NODE_W'(es[e]); e_dst = NODE_W'(ed[e]); e_attr = ATTR_W'(ea[e]);
          @(posedge clk); while (!e_ready) @(posedge clk);
          #1;
        end
        e_valid = 0;
      end
    join
    while (!done) @(posedge clk);
    begin
      int bad = 0;
      for (int v = 0; v < nt; v++) for (int k = 0; k < F; k++)
        if (dut.u_nbuf.mem[v * F + k] != ref_x[v][k]) begin
          if (bad < 3) $display("  %s: node %0d elem %0d buffer %0d expected %0d", name, v, k, dut.u_nbuf.mem[v * F + k], ref_x[v][k]);
          bad++;
        end
      check(bad == 0, $sformatf("%s: %0d final embeddings differ", name, bad));
    end
    for (int t = 0; t < T; t++)
      check(result[t] == ref_out[t], $sformatf("%s task %0d: got %0d expected %0d", name, t, result[t], ref_out[t]));
    // latency: one NE pass per layer plus prologue, each node at least 2F+4
    // cycles of MLP; MP at least deg*(F+2). Back-to-back NE-then-MP costs the
    // sum; the streaming pipeline must beat it.
    for (int v = 0; v < nt; v++) deg[v] = 0;
    foreach (es[e]) deg[es[e]]++;
    if (vn) begin deg[n] += n; for (int v = 0; v < n; v++) deg[v]++; end
    ne_cyc = L * nt * (HID + 4);
    mp_cyc = 0;
    for (int v = 0; v < nt; v++) mp_cyc += L * (2 + deg[v] * (F + 2));
    $display("%s: n=%0d e=%0d vn=%0d cycles=%0d (NE alone >= %0d, NE+MP serial ~ %0d)",
             name, n, es.size(), vn, cycles, ne_cyc, ne_cyc + mp_cyc);
    check(cycles >= ne_cyc, $sformatf("%s latency %0d below NE bound %0d", name, cycles, ne_cyc));
    check(cycles < ne_cyc + mp_cyc, $sformatf("%s latency %0d not below serial %0d", name, cycles, ne_cyc + mp_cyc));
  endtask

  task automatic random_edges(int n, int m);
    es.delete(); ed.delete(); ea.delete();
    for (int i = 0; i < m; i++) begin
      es.push_back($urandom_range(n - 1)); ed.push_back($urandom_range(n - 1));
      ea.push_back($urandom_range(ET - 2));
    end
  endtask

  initial begin
    param_wr = '0; start = 0; vn_en = 0; nf_valid = 0; nf_data = '0; e_valid = 0;
    e_src = '0; e_dst = '0; e_attr = '0; num_nodes = '0; num_edges = '0; rd_bank_q = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    load_params();
    while (init_busy) @(posedge clk);

    random_edges(12, 24);
    run_graph(12, 0, "random");

    random_edges(10, 20);
    run_graph(10, 1, "virtual-node");

    es.delete(); ed.delete(); ea.delete();
    for (int v = 1; v < 20; v++) begin   // hub 0 -> everyone, plus a sparse ring
      es.push_back(0); ed.push_back(v); ea.push_back(v % (ET - 1));
      es.push_back(v); ed.push_back((v % 19) + 1); ea.push_back(0);
    end
    run_graph(20, 0, "hub");

    $display("mechanisms: queue-full=%0d mp-idle=%0d ne-overlap=%0d swaps=%0d prologues=%0d vn-runs=%0d conversions=%0d",
             c_qfull, c_mp_idle, c_overlap, c_swap, c_prologue, c_vn, c_conv);
    check(c_qfull > 0, "node queue never filled (no back-pressure)");
    check(c_mp_idle > 0, "MP never waited on NE");
    check(c_overlap > 0, "load never overlapped the MLP");
    check(c_swap > 0, "message buffers never swapped");
    check(c_prologue == 3, "bypass prologue count");
    check(c_vn > 0, "virtual node mode never ran");
    check(c_conv == 3, "COO-to-CSR conversion count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
