// Testbench for rec_hasher: random vertices, feature bases and feature
// lengths against the address formula S + v * 2^fshift evaluated in 64-bit
// arithmetic, plus the worked HBM case (16 KiB rows, 1 KiB features): two
// vertices share a row exactly when they agree above their three low bits.
module tb_rec_hasher;
  import lignn_pkg::*;
  int checks = 0, failures = 0;
  logic [VID_W-1:0] vid_i;
  logic [ADDR_W-1:0] feat_base_i, faddr_o;
  logic [4:0] fshift_i;
  logic [ROWID_W-1:0] hash_o;
  rec_hasher dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic row_of(input logic [VID_W-1:0] v, output logic [ROWID_W-1:0] h);
    vid_i = v; #1; h = hash_o;
  endtask

  initial begin
    for (int t = 0; t < 5000; t++) begin
      longint unsigned a;
      fshift_i = 5'(8 + $urandom % 4);           // N = 64 .. 512 floats
      feat_base_i = ADDR_W'({$urandom % 4, $urandom}) & ~ADDR_W'(4095);
      vid_i = VID_W'($urandom % 110000000);
      #1;
      a = (longint'(feat_base_i) + (longint'(vid_i) << fshift_i)) & ((64'd1 << ADDR_W) - 1);
      check(64'(faddr_o) == a, "feature address");
      check(64'(hash_o) == (a >> ROW_LSB), "row hash");
    end
    // worked case: N = 256 floats (1 KiB), base on a row boundary
    fshift_i = 5'd10;
    feat_base_i = ADDR_W'(40'h1_2345_0000) & ~ADDR_W'(16383);
    for (int t = 0; t < 2000; t++) begin
      logic [VID_W-1:0] v, u;
      logic [ROWID_W-1:0] hv, hu;
      v = VID_W'($urandom % 100000);
      u = ($urandom % 2) ? (v ^ VID_W'($urandom % 8)) : VID_W'($urandom % 100000);
      row_of(v, hv); row_of(u, hu);
      check((hv == hu) == ((v & ~VID_W'(7)) == (u & ~VID_W'(7))), "shared row iff v&~7 == u&~7");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
