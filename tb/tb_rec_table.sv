// Testbench for rec_table (8 x 4 table, period of 12 edges): random edges
// whose row hash comes from a small set, random output backpressure, and a
// flush at the end.  Every edge must come out exactly once; between two
// group ends all edges carry the same hash, in arrival order; output
// periods must start both on the edge count and on a full queue or table.
module tb_rec_table;
  import lignn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [15:0] range_i;
  logic flush_i, in_valid, in_ready, out_valid, out_ready, out_grp_last, busy_o, ev_period;
  logic [ROWID_W-1:0] in_hash;
  edge_t in_edge, out_edge;
  rec_table #(.ENTRIES(8), .DEPTH(4)) dut (.*);

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

  function automatic logic [ROWID_W-1:0] h_of(input logic [VID_W-1:0] src);
    return ROWID_W'(src >> 3);
  endfunction

  bit seen[int];
  int n_in = 0, n_out = 0, periods = 0, grp_len = 0;
  int last_dst = -1;
  logic [ROWID_W-1:0] grp_hash;
  bit in_grp = 0;

  // output monitor
  always @(negedge clk) if (rst_n) begin
    out_ready <= 1'($urandom);
    #1;
    if (ev_period) periods++;
    if (out_valid && out_ready) begin
      int id;
      id = int'(out_edge.dst);
      check(!seen.exists(id), "edge out once");
      seen[id] = 1;
      n_out++;
      if (in_grp) begin
        check(h_of(out_edge.src) == grp_hash, "group shares one row hash");
        check(id > last_dst, "arrival order inside a group");
      end
      grp_hash = h_of(out_edge.src);
      last_dst = id;
      in_grp = !out_grp_last;
    end
  end

  initial begin
    in_valid = 0; flush_i = 0; range_i = 16'd12; in_edge = '0; in_hash = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // Directed: 6 rows x 2 edges = 12 edges, no queue or table full; the
    // period must end on the edge count alone and release all 12.
    for (int i = 0; i < 12; i++) begin
      @(negedge clk);
      in_valid = 1;
      in_edge.src = VID_W'((i % 6) * 8);
      in_edge.dst = VID_W'(i);
      in_hash = h_of(in_edge.src);
      #1 check(in_ready, "room for the directed edges");
      n_in++;
    end
    @(negedge clk); in_valid = 0;
    repeat (60) @(negedge clk);
    check(n_out == 12 && periods == 1, $sformatf("range period: %0d out, %0d periods", n_out, periods));
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      in_valid = 1;
      in_edge.src = VID_W'(($urandom % ((i < 1500) ? 40 : 200)));
      in_edge.dst = VID_W'(i + 12);
      in_hash = h_of(in_edge.src);
      #1;
      while (!in_ready) begin @(negedge clk); #1; end
      n_in++;
    end
    @(negedge clk); in_valid = 0; flush_i = 1;
    repeat (200) @(negedge clk);
    flush_i = 0;
    repeat (5) @(negedge clk);
    check(n_out == n_in, $sformatf("%0d in, %0d out", n_in, n_out));
    check(!busy_o, "empty after flush");
    check(periods > 3000 / 12 / 2, $sformatf("%0d output periods", periods));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
