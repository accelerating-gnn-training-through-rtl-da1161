// Testbench for burst_filter: checks that every burst leaves on exactly
// one output unchanged, that non-droppable bursts and a disabled filter
// drop nothing, and that the dropped share matches alpha/256 within 3
// points for several drop rates.
module tb_burst_filter;
  import lignn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic en;
  logic [FRAC_W-1:0] alpha;
  logic in_valid, in_ready, keep_valid, keep_ready, drop_valid, drop_ready;
  mapped_burst_t in_bst;
  burst_filter dut (.*);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic run(input bit e, input int a, input int n, input bit mix);
    int drops = 0, droppables = 0;
    en = e; alpha = FRAC_W'(a);
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      in_valid = 1;
      in_bst = mapped_burst_t'({$urandom, $urandom, $urandom});
      in_bst.droppable = mix ? 1'($urandom) : 1'b1;
      keep_ready = 1'($urandom); drop_ready = 1'($urandom);
      #1;
      check(keep_valid ^ drop_valid, "exactly one output");
      check(in_ready == (keep_valid ? keep_ready : drop_ready), "ready follows chosen output");
      if (!in_bst.droppable || !e) check(!drop_valid, "never drop protected burst");
      // hold until accepted
      while (!in_ready) begin
        @(negedge clk);
        keep_ready = 1'($urandom); drop_ready = 1'($urandom);
        #1;
      end
      if (in_bst.droppable) droppables++;
      if (drop_valid) drops++;
    end
    @(negedge clk) in_valid = 0;
    if (e && droppables > 0) begin
      int pct_x10 = drops * 1000 / droppables;
      int exp_x10 = a * 1000 / 256;
      check(pct_x10 > exp_x10 - 30 && pct_x10 < exp_x10 + 30,
            $sformatf("drop share %0d/1000 vs %0d/1000", pct_x10, exp_x10));
    end
  endtask

  initial begin
    in_valid = 0; keep_ready = 0; drop_ready = 0; in_bst = '0; en = 0; alpha = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(1'b1, 128, 8000, 1'b0);
    run(1'b1,  26, 6000, 1'b0);
    run(1'b1, 205, 6000, 1'b0);
    run(1'b1, 128, 4000, 1'b1);
    run(1'b0, 200, 2000, 1'b0);
    run(1'b1,   0, 2000, 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
