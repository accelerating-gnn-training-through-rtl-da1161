// Testbench for fake_zero_merge: random DRAM results and dropped bursts
// under random output backpressure.  Every input beat must appear exactly
// once at the output, DRAM data unchanged with dropped = 0, dropped bursts
// as zero data with dropped = 1, and with both inputs waiting and the
// output always ready the grants must alternate.
module tb_fake_zero_merge;
  import lignn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rsp_valid, rsp_ready, drop_valid, drop_ready, tile_valid, tile_ready;
  dram_rsp_t rsp;
  burst_t drop;
  tile_beat_t tile;
  fake_zero_merge dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n_rsp = 0, n_drop = 0, out_rsp = 0, out_drop = 0, alt = 0, both = 0;
  initial begin
    int prev;
    rsp_valid = 0; drop_valid = 0; tile_ready = 0; rsp = '0; drop = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    prev = -1;
    for (int cyc = 0; cyc < 6000; cyc++) begin
      @(negedge clk);
      if (!rsp_valid || rsp_ready) begin
        rsp_valid = 1'($urandom);
        rsp.b = burst_t'({$urandom, $urandom});
        rsp.data = {16{$urandom}};
      end
      if (!drop_valid || drop_ready) begin
        drop_valid = 1'($urandom);
        drop = burst_t'({$urandom, $urandom});
      end
      tile_ready = (cyc < 3000) ? 1'b1 : 1'($urandom);
      #1;
      check(tile_valid == (rsp_valid || drop_valid), "output valid");
      check(!(rsp_ready && drop_ready), "one grant");
      if (tile_valid && tile_ready) begin
        check(rsp_ready || drop_ready, "a grant when accepted");
        if (rsp_ready) begin
          check(tile.b == rsp.b && tile.data == rsp.data && !tile.dropped, "DRAM beat passed");
          out_rsp++;
        end else begin
          check(tile.b == drop && tile.data == '0 && tile.dropped, "fake zero beat");
          out_drop++;
        end
        if (rsp_valid && drop_valid && cyc < 3000) begin
          both++;
          if (prev >= 0 && (rsp_ready ? 1 : 0) != prev) alt++;
        end
        prev = rsp_ready ? 1 : 0;
      end else check(!rsp_ready && !drop_ready, "no grant without output");
      if (rsp_valid && rsp_ready) n_rsp++;
      if (drop_valid && drop_ready) n_drop++;
    end
    check(n_rsp == out_rsp && n_drop == out_drop && n_rsp > 500 && n_drop > 500, "all beats out");
    check(alt * 10 > both * 7, $sformatf("round robin: %0d of %0d contended grants alternate", alt, both));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
