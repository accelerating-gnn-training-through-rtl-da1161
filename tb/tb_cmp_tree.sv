// Testbench for cmp_tree: random queue sizes and eligibility on a
// 64-leaf minimum tree and a 5-leaf (padded) maximum tree.  The winner must
// be eligible and hold the extreme value found by a linear scan; with all
// values equal, random tie bits must spread the winner over many leaves.
module tb_cmp_tree;
  int checks = 0, failures = 0;

  logic [63:0][5:0] v64;  logic [63:0] e64;  logic [63:0] r64;
  logic f64;  logic [5:0] i64;  logic [5:0] o64;
  cmp_tree #(.N(64), .W(6), .FIND_MAX(1'b0)) u_min (
    .val_i(v64), .elig_i(e64), .rnd_i(r64), .found_o(f64), .idx_o(i64), .val_o(o64));

  logic [4:0][5:0] v5;  logic [4:0] e5;  logic [7:0] r5;
  logic f5;  logic [2:0] i5;  logic [5:0] o5;
  cmp_tree #(.N(5), .W(6), .FIND_MAX(1'b1)) u_max (
    .val_i(v5), .elig_i(e5), .rnd_i(r5), .found_o(f5), .idx_o(i5), .val_o(o5));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit seen[64];
    int distinct;
    for (int t = 0; t < 3000; t++) begin
      int best, any;
      for (int i = 0; i < 64; i++) begin
        v64[i] = 6'($urandom % ((t % 2) ? 4 : 33));
        e64[i] = ($urandom % 8) != 0 || (t % 5 == 0);
      end
      if (t % 97 == 0) e64 = '0;
      r64 = {$urandom, $urandom};
      #1;
      best = 999; any = 0;
      for (int i = 0; i < 64; i++) if (e64[i]) begin any = 1; if (int'(v64[i]) < best) best = int'(v64[i]); end
      check(f64 == any, "min found");
      if (any) begin
        check(e64[i64], "min winner eligible");
        check(int'(o64) == best && v64[i64] == o64, "min value");
      end
      // 5-leaf max tree
      for (int i = 0; i < 5; i++) begin v5[i] = 6'($urandom % 6); e5[i] = 1'($urandom); end
      r5 = 8'($urandom);
      #1;
      best = -1; any = 0;
      for (int i = 0; i < 5; i++) if (e5[i]) begin any = 1; if (int'(v5[i]) > best) best = int'(v5[i]); end
      check(f5 == any, "max found");
      if (any) check(e5[i5] && int'(o5) == best && v5[i5] == o5, $sformatf("max winner v=%p e=%b i=%0d o=%0d", v5, e5, i5, o5));
    end
    // tie breaking
    for (int i = 0; i < 64; i++) seen[i] = 0;
    v64 = '0; e64 = '1;
    for (int t = 0; t < 400; t++) begin
      r64 = {$urandom, $urandom};
      #1 seen[i64] = 1;
    end
    distinct = 0;
    foreach (seen[i]) distinct += seen[i];
    check(distinct > 40, $sformatf("random ties reach %0d of 64 leaves", distinct));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
