// tb_csr_table: writes random degree/offset entries and neighbor/attribute
// entries, reads them back through the synchronous read ports and checks
// the one-cycle read latency (the old value is seen in the cycle the
// address is applied, the new one in the next).
module tb_csr_table;
  localparam int MAXN = 32, MAXE = 64;
  localparam int NODE_W = $clog2(MAXN + 1), EDGE_W = $clog2(MAXE + 1), ATTR_W = 4;

  logic clk = 0;
  always #5 clk = ~clk;

  logic node_we, edge_we;
  logic [NODE_W-1:0] node_waddr, nbr_wdata, node_raddr, nbr_rdata;
  logic [EDGE_W-1:0] deg_wdata, off_wdata, edge_waddr, deg_rdata, off_rdata, edge_raddr;
  logic [ATTR_W-1:0] attr_wdata, attr_rdata;

  csr_table #(.MAX_NODES(MAXN), .MAX_EDGES(MAXE), .ATTR_W(ATTR_W)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int deg [MAXN], off [MAXN], nbr [MAXE], att [MAXE];

  initial begin
    node_we = 0; edge_we = 0; node_waddr = '0; edge_waddr = '0; deg_wdata = '0; off_wdata = '0;
    nbr_wdata = '0; attr_wdata = '0; node_raddr = '0; edge_raddr = '0;
    for (int v = 0; v < MAXN; v++) begin
      deg[v] = $urandom_range(MAXE); off[v] = $urandom_range(MAXE);
      @(negedge clk); node_we = 1; node_waddr = NODE_W'(v);
      deg_wdata = EDGE_W'(deg[v]); off_wdata = EDGE_W'(off[v]);
    end
    for (int p = 0; p < MAXE; p++) begin
      nbr[p] = $urandom_range(MAXN - 1); att[p] = $urandom_range(15);
      @(negedge clk); node_we = 0; edge_we = 1; edge_waddr = EDGE_W'(p);
      nbr_wdata = NODE_W'(nbr[p]); attr_wdata = ATTR_W'(att[p]);
    end
    @(negedge clk); edge_we = 0;
    for (int i = 0; i < 100; i++) begin
      int v, p;
      v = $urandom_range(MAXN - 1); p = $urandom_range(MAXE - 1);
      @(negedge clk); node_raddr = NODE_W'(v); edge_raddr = EDGE_W'(p);
      @(negedge clk);
      check(int'(deg_rdata) == deg[v] && int'(off_rdata) == off[v], $sformatf("node %0d read", v));
      check(int'(nbr_rdata) == nbr[p] && int'(attr_rdata) == att[p], $sformatf("edge %0d read", p));
    end
    // read latency: apply a new address, data must still be the old one
    // until the next rising edge
    @(negedge clk); edge_raddr = EDGE_W'(3);
    @(negedge clk); edge_raddr = EDGE_W'(4);
    #1 check(int'(nbr_rdata) == nbr[3], "read data changed before the clock edge");
    @(negedge clk);
    check(int'(nbr_rdata) == nbr[4], "read data one cycle after the address");
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
