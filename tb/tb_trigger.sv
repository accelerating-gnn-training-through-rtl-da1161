// Testbench for trigger: each firing condition is raised on its own and
// the pulse is expected exactly one cycle later; conditions below their
// thresholds must not fire, nothing fires while busy, and an event seen
// while busy fires once busy drops.  The idle-time firing is checked
// against its cycle count.
module tb_trigger;
  import lignn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  trig_cfg_t cfg;
  logic [6:0] used_i;
  logic [5:0] qsize_i;
  logic ins_fire_i, ins_last_i, blocked_i, flush_i, busy_i, fire_o;
  trigger #(.USED_W(7), .CNT_W(6)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic quiet();
    ins_fire_i = 0; ins_last_i = 0; blocked_i = 0; flush_i = 0;
  endtask

  // Drive one cycle of inputs, then return fire_o seen in the next cycle.
  task automatic pulse(output bit fired);
    @(negedge clk);
    quiet();
    #1 fired = fire_o;
  endtask

  // Run n quiet cycles and count pulses.
  task automatic idle(input int n, output int fires);
    fires = 0;
    repeat (n) begin @(negedge clk); quiet(); #1 fires += fire_o; end
  endtask

  initial begin
    bit f;
    int n;
    cfg = '0; used_i = 0; qsize_i = 0; busy_i = 0; quiet();
    repeat (3) @(posedge clk);
    rst_n = 1;

    // per-request mode (LG-R)
    cfg.mode = TRIG_PER_REQUEST;
    @(negedge clk); used_i = 1; ins_fire_i = 1; ins_last_i = 0;
    pulse(f); check(!f, "no fire mid-request");
    @(negedge clk); ins_fire_i = 1; ins_last_i = 1;
    pulse(f); check(f, "fire after last burst of a request");
    idle(5, n); check(n == 0, "single pulse");

    // custom mode: table size threshold
    cfg.mode = TRIG_CUSTOM; cfg.tbl_thresh = 4;
    @(negedge clk); used_i = 3; pulse(f); check(!f, "below table threshold");
    @(negedge clk); used_i = 4; #1 check(!fire_o, "registered, not combinational");
    @(negedge clk); #1 check(fire_o, "table threshold fires next cycle");
    used_i = 0; idle(3, n);
    cfg.tbl_thresh = 0;

    // queue size threshold
    cfg.q_thresh = 5; used_i = 2;
    @(negedge clk); ins_fire_i = 1; qsize_i = 4; pulse(f); check(!f, "below queue threshold");
    @(negedge clk); ins_fire_i = 1; qsize_i = 5; pulse(f); check(f, "queue threshold");
    cfg.q_thresh = 0; idle(2, n);

    // burst count threshold (counter restarted by the last firing)
    cfg.cnt_thresh = 10; n = 0;
    for (int i = 0; i < 9; i++) begin
      @(negedge clk); ins_fire_i = 1; #1 n += fire_o;
    end
    check(n == 0, "no fire before 10 bursts");
    @(negedge clk); ins_fire_i = 1; pulse(f); check(f, "fire at 10th burst");
    cfg.cnt_thresh = 0;

    // idle time threshold
    cfg.time_thresh = 20; used_i = 1;
    begin
      int at = -1;
      for (int c = 1; c <= 40 && at < 0; c++) begin
        @(negedge clk); quiet(); #1 if (fire_o) at = c;
      end
      check(at >= 20 && at <= 22, $sformatf("idle fire after %0d cycles", at));
    end
    cfg.time_thresh = 0;

    // blocked insert, held off by busy
    busy_i = 1;
    @(negedge clk); blocked_i = 1;
    idle(6, n); check(n == 0, "no fire while busy");
    @(negedge clk); busy_i = 0; #1 check(!fire_o, "pending not yet");
    @(negedge clk); #1 check(fire_o, "pending event fires after busy drops");
    idle(4, n); check(n == 0, "pending fires once");

    // flush only with a non-empty table
    used_i = 0;
    @(negedge clk); flush_i = 1; pulse(f); check(!f, "flush of empty table");
    used_i = 3;
    @(negedge clk); flush_i = 1; pulse(f); check(f, "flush fires");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
