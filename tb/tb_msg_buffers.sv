// tb_msg_buffers: checks the pair of message buffers.
//   - after reset the sweep clears both buffers (init_busy for DEPTH cycles)
//   - random accumulate requests, one per cycle, including back-to-back
//     requests to one address, land in the accumulating buffer only
//   - reading the read-only buffer returns its sum one cycle later and
//     clears the element
//   - swapping rd_bank exchanges the roles of the two buffers
module tb_msg_buffers;
  import gengnn_pkg::*;
  localparam int MAXN = 8, F = 4, DEPTH = MAXN * F, ADDR_W = $clog2(DEPTH);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic rd_bank, init_busy, rd_en, acc_en;
  logic [ADDR_W-1:0] rd_addr, acc_addr;
  fx_t rd_data, acc_val;

  msg_buffers #(.MAX_NODES(MAXN), .EMB_DIM(F)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int model [2][DEPTH];
  int init_cycles = 0;

  // accumulate a burst into the non-read bank
  task automatic burst(int n);
    for (int i = 0; i < n; i++) begin
      int a, v;
      a = (i % 3 == 0) ? 5 : $urandom_range(DEPTH - 1);   // every third hits address 5
      v = int'($urandom_range(2000)) - 1000;
      @(negedge clk); acc_en = 1; acc_addr = ADDR_W'(a); acc_val = v;
      model[~rd_bank][a] += v;
    end
    @(negedge clk); acc_en = 0;
    repeat (2) @(negedge clk);
  endtask

  // read the whole read bank, check, and check it is cleared
  task automatic drain(string name);
    int bad;
    bad = 0;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); rd_en = 1; rd_addr = ADDR_W'(a);
      @(negedge clk); rd_en = 0;
      if (rd_data != model[rd_bank][a]) begin
        bad++;
        $display("  %s addr %0d got %0d expected %0d", name, a, rd_data, model[rd_bank][a]);
      end
      model[rd_bank][a] = 0;
    end
    check(bad == 0, $sformatf("%s: %0d elements wrong", name, bad));
  endtask

  initial begin
    rd_bank = 0; rd_en = 0; acc_en = 0; rd_addr = '0; acc_addr = '0; acc_val = '0;
    for (int b = 0; b < 2; b++) for (int a = 0; a < DEPTH; a++) model[b][a] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    @(posedge clk);
    while (init_busy) begin @(posedge clk); init_cycles++; end
    check(init_cycles >= DEPTH - 2 && init_cycles <= DEPTH + 1, $sformatf("init sweep %0d cycles", init_cycles));
    // layer A: read bank 0 (all zero), accumulate into bank 1
    burst(60);
    drain("bank0 after sweep");
    // layer B: swap; bank 1 now read-only, accumulate into bank 0
    @(negedge clk); rd_bank = 1;
    burst(60);
    drain("bank1 sums");
    // layer C: swap back; bank 0 holds the layer-B sums, bank 1 was cleared
    @(negedge clk); rd_bank = 0;
    burst(20);
    drain("bank0 sums");
    @(negedge clk); rd_bank = 1;
    drain("bank1 partial sums");
    @(negedge clk); rd_bank = 0;
    drain("bank0 cleared by reading");
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
