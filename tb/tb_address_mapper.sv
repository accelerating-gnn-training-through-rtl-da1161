// Testbench for address_mapper: random requests under random backpressure;
// every burst is compared with the burst range and row number computed
// here from the request.  Also checks the one-burst-per-cycle rate.
module tb_address_mapper;
  import lignn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic req_valid, req_ready, bst_valid, bst_ready;
  rd_req_t req;
  mapped_burst_t bst;
  address_mapper dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  logic [BADDR_W-1:0] exp_b;
  initial begin
    req_valid = 0; bst_ready = 0; req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      logic [BADDR_W-1:0] first, last;
      int nb, got, cycles;
      bit   bp;
      req.addr      = {$urandom, $urandom} & ((64'd1 << ADDR_W) - 1);
      req.size      = SIZE_W'(($urandom % 2048) + 1);
      req.tag       = TAG_W'($urandom);
      req.droppable = 1'($urandom);
      first = req.addr[ADDR_W-1:BURST_LSB];
      last  = BADDR_W'((64'(req.addr) + 64'(req.size) - 1) >> BURST_LSB);
      nb    = int'(last - first) + 1;
      bp    = (t % 3 == 0);
      @(negedge clk);
      req_valid = 1;
      #1 check(req_ready, "ready when idle");
      got = 0; cycles = 0;
      while (got < nb) begin
        @(negedge clk);
        req_valid = 0;
        bst_ready = bp ? 1'($urandom) : 1'b1;
        #1;
        cycles++;
        if (bst_valid && bst_ready) begin
          exp_b = first + BADDR_W'(got);
          check(bst.b.baddr == exp_b, "burst address");
          check(bst.row == exp_b[BADDR_W-1:ROW_LSB-BURST_LSB], "row id");
          check(bst.b.tag == req.tag && bst.droppable == req.droppable, "tag/flag");
          check(bst.last == (got == nb - 1), "last flag");
          got++;
        end
      end
      if (!bp) check(cycles == nb, $sformatf("rate: %0d bursts in %0d cycles", nb, cycles));
      @(negedge clk);
      #1 check(!bst_valid && req_ready, "idle after request");
      bst_ready = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
