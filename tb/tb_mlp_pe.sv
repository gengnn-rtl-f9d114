// tb_mlp_pe: loads random weights for two layers, runs random input
// vectors through the MLP PE and compares with a reference computation of
// act(W2 * relu(W1 x + b1) + b2) in the same 32-bit fixed point. Checks
// the latency of HID + 4 cycles from start to done (one hidden element per
// cycle), that busy covers the run, that the input can change right after
// start without affecting the result, and both output activations.
module tb_mlp_pe;
  import gengnn_pkg::*;
  localparam int F = 6, L = 2, HID = 2 * F, LAYER_W = 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  param_wr_t param_wr;
  logic start, relu_out, busy, done;
  logic [LAYER_W-1:0] layer;
  fx_t in_vec [F];
  fx_t out_vec [F];

  mlp_pe #(.EMB_DIM(F), .NUM_LAYERS(L), .LAYER_W(LAYER_W)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int W1 [L][HID][F], W2 [L][F][HID], B1 [L][HID], B2 [L][F];

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

  initial begin
    int v [F], x [F], hid [HID], y, cyc;
    param_wr = '0; start = 0; relu_out = 0; layer = '0;
    for (int k = 0; k < F; k++) in_vec[k] = '0;
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
    end
    for (int trial = 0; trial < 20; trial++) begin
      int l, bad;
      bit r;
      l = trial % L; r = trial[1];
      for (int k = 0; k < F; k++) x[k] = rnd(100000);
      @(negedge clk);
      for (int k = 0; k < F; k++) in_vec[k] = x[k];
      layer = LAYER_W'(l); relu_out = r; start = 1;
      @(negedge clk); start = 0;
      for (int k = 0; k < F; k++) in_vec[k] = $urandom;   // must not matter any more
      cyc = 1;
      check(busy, "busy low after start");
      while (!done) begin @(negedge clk); cyc++; end
      check(cyc == HID + 4, $sformatf("latency %0d cycles, expected %0d", cyc, HID + 4));
      // reference
      for (int j = 0; j < HID; j++) begin
        hid[j] = B1[l][j];
        for (int k = 0; k < F; k++) hid[j] += rmul(W1[l][j][k], x[k]);
        if (hid[j] < 0) hid[j] = 0;
      end
      bad = 0;
      for (int o = 0; o < F; o++) begin
        y = B2[l][o];
        for (int j = 0; j < HID; j++) y += rmul(W2[l][o][j], hid[j]);
        if (r && y < 0) y = 0;
        if (out_vec[o] != y) begin
          bad++;
          $display("  trial %0d out[%0d]=%0d expected %0d", trial, o, out_vec[o], y);
        end
      end
      check(bad == 0, $sformatf("trial %0d: %0d outputs wrong", trial, bad));
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
