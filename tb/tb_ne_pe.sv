// tb_ne_pe: the GIN node embedding PE with behavioural node embedding and
// message memories and a node-queue sink whose ready is random.
//   1. BYPASS: every node's stored embedding is pushed unchanged, in order,
//      nothing is written back and no message is read
//   2. COMPUTE, layer 0: x <- relu(MLP((1+eps)x + m)) for every node,
//      compared with a reference; the pushed entries, the written-back
//      buffer and the cleared message memory are checked; node throughput
//      with an always-ready queue must be one node per HID+5 cycles or so
//   3. COMPUTE, last layer, virtual node on: no pushes, no final ReLU, the
//      virtual node (last id) is processed first and is left out of the
//      pooling outputs
module tb_ne_pe;
  import gengnn_pkg::*;
  localparam int MAXN = 16, F = 4, L = 2, HID = 2 * F, LAYER_W = 2;
  localparam int NODE_W = $clog2(MAXN + 1), ADDR_W = $clog2(MAXN * F), Q_W = NODE_W + F * 32;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  param_wr_t param_wr;
  logic cmd_start, vn_en, push_en, last_layer, busy, done;
  ne_mode_e mode;
  logic [LAYER_W-1:0] layer;
  logic [NODE_W-1:0] num_nodes;
  logic nb_re, nb_we, mb_rd_en, q_valid, q_ready, pool_valid;
  logic [ADDR_W-1:0] nb_raddr, nb_waddr, mb_rd_addr;
  fx_t nb_rdata, nb_wdata, mb_rd_data;
  logic [Q_W-1:0] q_data;
  fx_t pool_vec [F];

  ne_pe #(.MAX_NODES(MAXN), .EMB_DIM(F), .NUM_LAYERS(L), .LAYER_W(LAYER_W)) dut (.*);

  // behavioural memories (synchronous read, read-and-clear for messages)
  int nbm [MAXN * F], mbm [MAXN * F];
  int nb_reads = 0, mb_reads = 0, first_write = -1;
  always @(posedge clk) begin
    if (nb_re) begin nb_rdata <= nbm[nb_raddr]; nb_reads++; end
    if (nb_we) begin nbm[nb_waddr] <= nb_wdata; if (first_write < 0) first_write = nb_waddr; end
    if (mb_rd_en) begin mb_rd_data <= mbm[mb_rd_addr]; mbm[mb_rd_addr] <= 0; mb_reads++; end
  end

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int W1 [L][HID][F], W2 [L][F][HID], B1 [L][HID], B2 [L][F], EPS [L];
  function automatic int rnd(int range);
    return int'($urandom_range(2 * range - 1)) - range;
  endfunction
  function automatic int rmul(int a, int b);
    longint p;
    p = longint'(a) * longint'(b);
    return int'(p >>> FRAC_W);
  endfunction
  task automatic pw(param_sel_e sel, int l, int row, int v [F]);
    @(negedge clk);
    param_wr = '0; param_wr.en = 1; param_wr.sel = sel;
    param_wr.layer = LAYER_W'(l); param_wr.row = ROW_W'(row);
    for (int k = 0; k < F; k++) param_wr.vec[k] = v[k];
    @(negedge clk); param_wr.en = 0;
  endtask

  // queue sink and pooling monitor
  int q_ids [$];
  int q_vecs [$][F];
  int pool_cnt = 0, pool_sum [F];
  int ready_pct = 100;
  always @(negedge clk) q_ready <= ($urandom_range(99) < ready_pct);
  always @(posedge clk) begin
    if (q_valid && q_ready) begin
      int v [F];
      for (int k = 0; k < F; k++) v[k] = q_data[k*32 +: 32];
      q_ids.push_back(int'(q_data[Q_W-1 -: NODE_W]));
      q_vecs.push_back(v);
    end
    if (pool_valid) begin
      pool_cnt++;
      for (int k = 0; k < F; k++) pool_sum[k] += pool_vec[k];
    end
  end

  int x0 [MAXN][F], m0 [MAXN][F], ref_x [MAXN][F];
  task automatic reference(int n, int l, bit last);
    for (int v = 0; v < n; v++) begin
      int h [F], hid [HID], y;
      for (int k = 0; k < F; k++) h[k] = x0[v][k] + rmul(EPS[l], x0[v][k]) + m0[v][k];
      for (int j = 0; j < HID; j++) begin
        hid[j] = B1[l][j];
        for (int k = 0; k < F; k++) hid[j] += rmul(W1[l][j][k], h[k]);
        if (hid[j] < 0) hid[j] = 0;
      end
      for (int o = 0; o < F; o++) begin
        y = B2[l][o];
        for (int j = 0; j < HID; j++) y += rmul(W2[l][o][j], hid[j]);
        ref_x[v][o] = (!last && y < 0) ? 0 : y;
      end
    end
  endtask

  task automatic run(ne_mode_e md, int l, int n, bit vn, bit push, bit last, output int cyc);
    @(negedge clk);
    mode = md; layer = LAYER_W'(l); num_nodes = NODE_W'(n); vn_en = vn; push_en = push;
    last_layer = last; cmd_start = 1;
    @(negedge clk); cmd_start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    @(negedge clk);   // let the monitor see the outputs of the done cycle
  endtask

  initial begin
    int v [F], cyc, bad, n;
    param_wr = '0; cmd_start = 0; mode = NE_BYPASS; layer = '0; num_nodes = '0; vn_en = 0;
    push_en = 0; last_layer = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int l = 0; l < L; l++) begin
      for (int h = 0; h < HID; h++) begin
        for (int k = 0; k < F; k++) begin W1[l][h][k] = rnd(40000); v[k] = W1[l][h][k]; end
        pw(PS_W1, l, h, v);
        for (int o = 0; o < F; o++) begin W2[l][o][h] = rnd(40000); v[o] = W2[l][o][h]; end
        pw(PS_W2T, l, h, v);
        B1[l][h] = rnd(20000); v = '{default: 0}; v[0] = B1[l][h];
        pw(PS_B1, l, h, v);
      end
      for (int o = 0; o < F; o++) begin B2[l][o] = rnd(30000); v[o] = B2[l][o]; end
      pw(PS_B2, l, 0, v);
      EPS[l] = rnd(30000); v = '{default: 0}; v[0] = EPS[l];
      pw(PS_EPS, l, 0, v);
    end
    n = 6;
    for (int u = 0; u < n; u++) for (int k = 0; k < F; k++) begin
      x0[u][k] = rnd(100000); m0[u][k] = rnd(100000);
      nbm[u * F + k] = x0[u][k]; mbm[u * F + k] = m0[u][k];
    end

    // 1. bypass
    ready_pct = 50;
    run(NE_BYPASS, 0, n, 0, 1, 0, cyc);
    check(q_ids.size() == n, $sformatf("bypass pushed %0d entries", q_ids.size()));
    bad = 0;
    foreach (q_ids[i]) begin
      if (q_ids[i] != i) bad++;
      for (int k = 0; k < F; k++) if (q_vecs[i][k] != x0[i][k]) bad++;
    end
    check(bad == 0, "bypass entries differ from the stored embeddings");
    check(mb_reads == 0 && first_write < 0, "bypass read messages or wrote the buffer");

    // 2. compute, layer 0, queue always ready
    q_ids.delete(); q_vecs.delete(); ready_pct = 100;
    reference(n, 0, 0);
    run(NE_COMPUTE, 0, n, 0, 1, 0, cyc);
    bad = 0;
    check(q_ids.size() == n, "compute pushed count");
    foreach (q_ids[i]) begin
      if (q_ids[i] != i) bad++;
      for (int k = 0; k < F; k++) if (q_vecs[i][k] != ref_x[i][k]) bad++;
    end
    check(bad == 0, $sformatf("layer 0: %0d pushed values wrong", bad));
    bad = 0;
    for (int u = 0; u < n; u++) for (int k = 0; k < F; k++) begin
      if (nbm[u * F + k] != ref_x[u][k]) bad++;
      if (mbm[u * F + k] != 0) bad++;
    end
    check(bad == 0, $sformatf("layer 0: %0d buffer/message elements wrong", bad));
    $display("layer 0: %0d nodes in %0d cycles (%0d per node in steady state expected)", n, cyc, HID + 5);
    check(cyc <= n * (HID + 6) + 2 * F + 8, $sformatf("layer took %0d cycles", cyc));
    check(cyc >= n * (HID + 4), $sformatf("layer took only %0d cycles", cyc));

    // 3. last layer with a virtual node (node n-1 = 5 is the virtual one)
    for (int u = 0; u < n; u++) for (int k = 0; k < F; k++) begin
      x0[u][k] = nbm[u * F + k]; m0[u][k] = rnd(100000); mbm[u * F + k] = m0[u][k];
    end
    q_ids.delete(); q_vecs.delete(); first_write = -1; pool_cnt = 0;
    for (int k = 0; k < F; k++) pool_sum[k] = 0;
    reference(n, 1, 1);
    run(NE_COMPUTE, 1, n, 1, 0, 1, cyc);
    check(q_ids.size() == 0, "last layer pushed into the queue");
    check(first_write == (n - 1) * F, $sformatf("first node written was address %0d, not the virtual node", first_write));
    check(pool_cnt == n - 1, $sformatf("pooled %0d nodes", pool_cnt));
    bad = 0;
    for (int k = 0; k < F; k++) begin
      int s;
      s = 0;
      for (int u = 0; u < n - 1; u++) s += ref_x[u][k];
      if (s != pool_sum[k]) bad++;
    end
    check(bad == 0, "pooled sum wrong");
    bad = 0;
    for (int u = 0; u < n; u++) for (int k = 0; k < F; k++) if (nbm[u * F + k] != ref_x[u][k]) bad++;
    check(bad == 0, $sformatf("last layer: %0d buffer elements wrong", bad));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
