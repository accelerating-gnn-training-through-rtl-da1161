// Testbench for locality_merger (8 x 8 REC table): the same random edge
// list is sent with merging off and on.  Each edge must become exactly one
// request for its neighbour's feature (address S + src * 2^fshift, one
// feature long, tag = dst, droppable); with merging off the order is kept,
// with merging on the number of row changes between consecutive requests
// must drop.
module tb_locality_merger;
  import lignn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  merge_cfg_t cfg;
  logic flush, edge_valid, edge_ready, req_valid, req_ready, busy, ev_period;
  edge_t edge_in;
  rd_req_t req;
  locality_merger #(.ENTRIES(8), .DEPTH(8)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int NE = 1500;
  logic [VID_W-1:0] src_of [NE];

  task automatic run(input bit merge, output int row_changes);
    int got = 0, sent = 0, prev_dst = -1;
    bit seen [NE];
    logic [ROWID_W-1:0] prev_row;
    cfg.merge_en = merge;
    row_changes = 0;
    foreach (seen[i]) seen[i] = 0;
    fork
      begin
        for (int i = 0; i < NE; i++) begin
          @(negedge clk);
          edge_valid = 1;
          edge_in.src = src_of[i];
          edge_in.dst = VID_W'(i);
          #1;
          while (!edge_ready) begin @(negedge clk); #1; end
        end
        @(negedge clk); edge_valid = 0; flush = 1;
      end
      begin
        while (got < NE) begin
          @(negedge clk);
          req_ready = 1'($urandom % 4 != 0);
          #1;
          if (req_valid && req_ready) begin
            int d;
            d = int'(req.tag);
            check(d < NE && !seen[d], "each edge once");
            if (d < NE) begin
              seen[d] = 1;
              check(req.addr == cfg.feat_base + (ADDR_W'(src_of[d]) << cfg.fshift), "feature address");
            end
            check(req.size == SIZE_W'(1) << cfg.fshift && req.droppable, "size and flag");
            if (!merge) check(d == prev_dst + 1, "order kept without merging");
            if (got > 0 && req.addr[ADDR_W-1:ROW_LSB] != prev_row) row_changes++;
            prev_row = req.addr[ADDR_W-1:ROW_LSB];
            prev_dst = d;
            got++;
          end
        end
      end
    join
    @(negedge clk); flush = 0;
    repeat (3) @(negedge clk);
    check(!busy, "merger empty");
  endtask

  initial begin
    int rc_off, rc_on;
    edge_valid = 0; req_ready = 0; flush = 0; edge_in = '0;
    cfg.feat_base = 40'h0_4000_0000; cfg.fshift = 5'd10; cfg.range = 16'd64; cfg.merge_en = 0;
    for (int i = 0; i < NE; i++) src_of[i] = VID_W'($urandom % 160);
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(1'b0, rc_off);
    run(1'b1, rc_on);
    $display("row changes: %0d without merging, %0d with", rc_off, rc_on);
    check(rc_on * 4 < rc_off * 3, "merging groups reads of one row");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
