// Testbench for locality_filter (8 x 8 table) in three configurations:
// burst filter only (LG-B), row filter with custom trigger (LG-S), and row
// filter firing per request (LG-R), each with some non-droppable requests
// mixed in.  Every burst of every request must leave exactly once, on the
// keep or the drop output; non-droppable bursts must be kept; the dropped
// share must be near the configured rate; the trigger, the insertion stall
// and the bypass path must each be seen.  A fourth LG-B run marks half of
// the address space droppable by range: unflagged requests there must be
// dropped sometimes, unflagged requests outside it never.
module tb_locality_filter;
  import lignn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  filter_cfg_t cfg;
  logic flush, req_valid, req_ready, keep_valid, keep_ready, drop_valid, drop_ready, busy;
  rd_req_t req;
  burst_t keep, drop;
  logic ev_burst_drop, ev_row_keep, ev_row_drop, ev_fire, ev_stall, ev_bypass;
  logic signed [23:0] delta;
  locality_filter #(.ENTRIES(8), .DEPTH(8)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int pending [longint];     // burst id -> 1 while outstanding
  bit protect [longint];     // burst of a non-droppable request
  int n_keep, n_drop, n_fire, n_stall, n_bypass, n_rowdrop, n_rowkeep, n_prot_bursts;

  function automatic longint bid(input burst_t b);
    return {longint'(b.tag), 28'(b.baddr)};
  endfunction

  always @(negedge clk) if (rst_n) begin
    keep_ready <= 1'($urandom % 4 != 0);
    drop_ready <= 1'($urandom % 4 != 0);
    #1;
    if (ev_fire) n_fire++;
    if (ev_stall) n_stall++;
    if (ev_bypass) n_bypass++;
    if (ev_row_drop) n_rowdrop++;
    if (ev_row_keep) n_rowkeep++;
    if (keep_valid && keep_ready) begin
      check(pending.exists(bid(keep)), "kept burst was requested, once");
      pending.delete(bid(keep));
      n_keep++;
    end
    if (drop_valid && drop_ready) begin
      check(pending.exists(bid(drop)), "dropped burst was requested, once");
      check(!protect.exists(bid(drop)), "non-droppable burst never dropped");
      if (ranged.exists(bid(drop))) n_range_drop++;
      pending.delete(bid(drop));
      n_drop++;
    end
  end

  bit ranged [longint];      // flag clear, but inside the droppable range
  int n_range_drop;
  function automatic bit in_range(input logic [ADDR_W-1:0] a);
    return cfg.range_en && a >= cfg.drop_lo && a < cfg.drop_hi;
  endfunction

  int tag_ctr = 0;
  task automatic run(input string name, input int nreq, input int lo, input int hi);
    n_keep = 0; n_drop = 0; n_fire = 0; n_stall = 0; n_bypass = 0; n_rowdrop = 0; n_rowkeep = 0;
    n_prot_bursts = 0; n_range_drop = 0;
    for (int i = 0; i < nreq; i++) begin
      int v;
      v = $urandom % 1024;                      // 256-byte features, 64 per row
      @(negedge clk);
      req_valid = 1;
      req.addr = 40'h1_0000_0000 + ADDR_W'(v) * 256;
      req.size = 16'd256;
      req.tag = TAG_W'(tag_ctr++);
      req.droppable = ($urandom % 10) != 0;
      for (int b = 0; b < 4; b++) begin
        longint id;
        id = {longint'(req.tag), 28'((req.addr >> 6) + ADDR_W'(b))};
        pending[id] = 1;
        if (!req.droppable && in_range(req.addr)) ranged[id] = 1;
        else if (!req.droppable) begin protect[id] = 1; n_prot_bursts++; end
      end
      #1;
      while (!req_ready) begin @(negedge clk); #1; end
    end
    @(negedge clk); req_valid = 0; flush = 1;
    while (busy) @(negedge clk);
    flush = 0;
    repeat (20) @(negedge clk);
    check(pending.size() == 0, $sformatf("%s: %0d bursts never left", name, pending.size()));
    begin
      int share;
      share = (n_drop * 1000) / (n_keep + n_drop - n_prot_bursts);
      $display("%s: keep %0d drop %0d share %0d/1000 fires %0d stalls %0d bypass %0d rowkeep %0d rowdrop %0d",
               name, n_keep, n_drop, share, n_fire, n_stall, n_bypass, n_rowkeep, n_rowdrop);
      check(share >= lo && share <= hi, $sformatf("%s: dropped share %0d/1000", name, share));
    end
    check(n_bypass > 0, {name, ": bypass path used"});
    pending.delete(); protect.delete(); ranged.delete();
  endtask

  initial begin
    req_valid = 0; flush = 0; req = '0;
    cfg = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // LG-B: burst filter only
    cfg.burst_en = 1; cfg.burst_alpha = 8'd128; cfg.row_en = 0;
    run("LG-B", 400, 420, 580);
    check(n_fire == 0, "LG-B: no trigger");
    // LG-S: row filter, custom trigger
    cfg.burst_en = 0; cfg.row_en = 1;
    cfg.row.alpha = 8'd128; cfg.row.n = 16'd24; cfg.row.crit_min = 8'd2;
    cfg.trig.mode = TRIG_CUSTOM; cfg.trig.tbl_thresh = 8'd7; cfg.trig.q_thresh = 8'd8;
    cfg.trig.cnt_thresh = 16'd48; cfg.trig.time_thresh = 16'd100;
    run("LG-S", 600, 380, 620);
    check(n_fire > 10 && n_stall > 0 && n_rowdrop > 0 && n_rowkeep > 0, "LG-S: trigger, stall, row keep and drop seen");
    // LG-R: fire on every request, 16 x 16 table in the design (8 x 8 here)
    cfg.trig.mode = TRIG_PER_REQUEST; cfg.row.n = 16'd4;
    run("LG-R", 400, 350, 650);
    check(n_fire > 300, "LG-R: fires per request");
    check(n_range_drop == 0, "LG-R: no range configured");
    // LG-B with a droppable address range covering the lower half of the
    // features: unflagged requests there may be dropped, the others not
    cfg.burst_en = 1; cfg.row_en = 0;
    cfg.range_en = 1;
    cfg.drop_lo = ADDR_W'(40'h1_0000_0000);
    cfg.drop_hi = ADDR_W'(40'h1_0000_0000) + ADDR_W'(512 * 256);
    run("LG-B range", 400, 420, 580);
    check(n_range_drop > 0, "LG-B range: unflagged bursts in the range dropped");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
