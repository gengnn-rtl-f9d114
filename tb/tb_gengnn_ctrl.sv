// tb_gengnn_ctrl: the graph sequencer against behavioural stand-ins for the
// converter, the two PEs, the node queue and the head, each taking a random
// time. Checks, for graphs with and without a virtual node:
//   - exactly (num_nodes + vn) * EMB_DIM feature beats are accepted
//   - no pass starts before the converter and the feature load are done
//   - NUM_LAYERS + 1 passes: a bypass prologue (buffer roles "read 1",
//     messages of layer 0) then layers 0..L-1 in compute mode, reading
//     buffer l%2, scattering layer l+1, with pushes off in the last layer
//   - a pass never starts while the queue holds nodes or MP is busy
//   - the head starts once, after the last pass, and done follows it
module tb_gengnn_ctrl;
  import gengnn_pkg::*;
  localparam int MAXN = 16, MAXE = 64, F = 3, L = 3, LAYER_W = 2;
  localparam int NODE_W = $clog2(MAXN + 1), EDGE_W = $clog2(MAXE + 1);
  localparam int ADDR_W = $clog2(MAXN * F), QC_W = $clog2(QUEUE_DEPTH + 1);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, vn_en, busy, done, nf_valid, nf_ready, feat_we, conv_start, conv_done;
  logic mb_init_busy, rd_bank, ne_start, ne_push_en, ne_last_layer, ne_done, mp_busy;
  logic head_clear, head_start, head_done, vn_q;
  logic [NODE_W-1:0] num_nodes, tot_nodes, orig_nodes;
  logic [EDGE_W-1:0] num_edges;
  logic [31:0] cycles;
  logic [ADDR_W-1:0] feat_waddr;
  ne_mode_e ne_mode;
  logic [LAYER_W-1:0] ne_layer, mp_edge_layer;
  logic [QC_W-1:0] q_count;

  gengnn_ctrl #(.MAX_NODES(MAXN), .MAX_EDGES(MAXE), .EMB_DIM(F), .NUM_LAYERS(L),
                .LAYER_W(LAYER_W)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // behavioural stand-ins, all driven at the negative edge
  int conv_t = -1, ne_t = -1, drain_t = 0, mp_t = 0, head_t = -1;
  int feats = 0, passes = 0, heads = 0, early = 0, bad_pass = 0, conv_started = 0;
  bit conv_fin = 0;
  always @(negedge clk) begin
    conv_done <= 0; ne_done <= 0; head_done <= 0;
    nf_valid <= ($urandom_range(3) != 0);
    if (conv_t > 0) conv_t--;
    else if (conv_t == 0) begin conv_done <= 1; conv_t = -1; conv_fin = 1; end
    if (ne_t > 0) begin
      ne_t--;
      // the queue fills and MP works while NE runs
      q_count <= QC_W'($urandom_range(1, QUEUE_DEPTH)); mp_busy <= 1;
    end else if (ne_t == 0) begin
      ne_done <= 1; ne_t = -1; drain_t = $urandom_range(0, 12); mp_t = drain_t + $urandom_range(0, 8);
    end else begin
      if (drain_t > 0) drain_t--;
      if (mp_t > 0) mp_t--;
      q_count <= (drain_t > 0) ? QC_W'($urandom_range(1, QUEUE_DEPTH)) : '0;
      mp_busy <= (mp_t > 0);
    end
    if (head_t > 0) head_t--;
    else if (head_t == 0) begin head_done <= 1; head_t = -1; end
  end

  int exp_layer;
  bit exp_prologue;
  always @(posedge clk) if (rst_n) begin
    if (feat_we) begin
      if (int'(feat_waddr) != feats) early++;
      feats++;
    end
    if (conv_start) begin conv_started++; conv_t = $urandom_range(5, 60); end
    if (ne_start) begin
      if (!conv_fin || feats != int'(tot_nodes) * F) early++;
      if (q_count != 0 || mp_busy || ne_t >= 0) early++;
      if (exp_prologue) begin
        if (ne_mode != NE_BYPASS || rd_bank != 1'b1 || mp_edge_layer != 0 || !ne_push_en) bad_pass++;
      end else begin
        if (ne_mode != NE_COMPUTE || int'(ne_layer) != exp_layer || rd_bank != exp_layer[0]) bad_pass++;
        if (exp_layer == L - 1) begin
          if (ne_push_en || !ne_last_layer) bad_pass++;
        end else if (!ne_push_en || ne_last_layer || int'(mp_edge_layer) != exp_layer + 1) bad_pass++;
        exp_layer++;
      end
      exp_prologue = 0;
      passes++;
      ne_t = $urandom_range(3, 40);
    end
    if (head_start) begin
      heads++;
      if (passes != L + 1 || ne_t >= 0 || q_count != 0 || mp_busy) early++;
      head_t = $urandom_range(2, 10);
    end
  end

  initial begin
    int cyc;
    start = 0; vn_en = 0; num_nodes = '0; num_edges = '0; mb_init_busy = 1;
    repeat (2) @(posedge clk); rst_n = 1;
    repeat (3) @(negedge clk); mb_init_busy = 0;
    for (int g = 0; g < 4; g++) begin
      int n, vn;
      n = $urandom_range(1, MAXN - 1); vn = g % 2;
      feats = 0; passes = 0; heads = 0; early = 0; bad_pass = 0; conv_started = 0;
      conv_fin = 0; exp_layer = 0; exp_prologue = 1;
      @(negedge clk);
      num_nodes = NODE_W'(n); vn_en = vn[0]; num_edges = EDGE_W'($urandom_range(0, MAXE));
      start = 1;
      @(negedge clk); start = 0;
      cyc = 1;
      check(busy, "busy low after start");
      while (!done) begin @(negedge clk); cyc++; end
      check(feats == (n + vn) * F, $sformatf("graph %0d: %0d feature beats, expected %0d", g, feats, (n + vn) * F));
      check(conv_started == 1, "converter not started exactly once");
      check(passes == L + 1, $sformatf("graph %0d: %0d passes", g, passes));
      check(heads == 1, "head not started exactly once");
      check(early == 0, $sformatf("graph %0d: %0d steps started too early", g, early));
      check(bad_pass == 0, $sformatf("graph %0d: %0d passes with wrong settings", g, bad_pass));
      check(int'(tot_nodes) == n + vn, "tot_nodes");
      check(cycles == 32'(cyc - 1), $sformatf("cycle counter %0d, measured %0d", cycles, cyc - 1));
      @(negedge clk);
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
