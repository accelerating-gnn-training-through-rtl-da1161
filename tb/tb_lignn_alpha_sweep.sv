// Drop-rate sweep for lignn_top at its default sizes, with a behavioural
// DRAM.  The same synthetic aggregation edge list (1 KiB features,
// neighbours from a small vertex range) runs in the main configuration,
// row dropout with custom trigger and locality-aware merging, at
// alpha = 0.1, 0.3, 0.5, 0.7 and 0.9 (alpha is an 8-bit fraction, so
// 26, 77, 128, 179 and 230 of 256), after one run without dropout.
// Every burst must come back once, with DRAM data or as a flagged zero
// beat; non-droppable reads are never dropped; the dropped share must be
// within 0.06 of alpha; and the number of DRAM row activations must fall
// as alpha rises (each step at most 2 % above the previous one).
module tb_lignn_alpha_sweep;
  import lignn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  lignn_cfg_t cfg;
  logic flush, edge_valid, edge_ready, req_valid, req_ready;
  logic dram_req_valid, dram_req_ready, dram_rsp_valid, dram_rsp_ready;
  logic tile_valid, tile_ready, busy;
  edge_t edge_in;
  rd_req_t req;
  burst_t dram_req;
  dram_rsp_t dram_rsp;
  tile_beat_t tile;
  lignn_stats_t stats;
  logic signed [23:0] delta;
  int activations, accesses;

  lignn_top dut (.*);

  dram_model #(.LATENCY(8)) u_dram (
    .clk, .rst_n, .req_valid(dram_req_valid), .req_ready(dram_req_ready), .req(dram_req),
    .rsp_valid(dram_rsp_valid), .rsp_ready(dram_rsp_ready), .rsp(dram_rsp),
    .activations, .accesses);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int NE = 400;           // edges per run
  localparam int FBYTES = 1024;      // N = 256 float32 features
  localparam int FB = FBYTES / 64;   // bursts per feature
  localparam logic [ADDR_W-1:0] FEAT_BASE = 40'h0_8000_0000;
  localparam logic [ADDR_W-1:0] W_BASE    = 40'h2_0000_0000;
  logic [VID_W-1:0] src_of [NE];

  int pending [longint];
  bit protect [longint];
  int n_data, n_zero, n_prot;

  function automatic longint bid(input burst_t b);
    return {longint'(b.tag), 28'(b.baddr)};
  endfunction

  function automatic logic [DATA_W-1:0] data_of(input logic [BADDR_W-1:0] b);
    logic [DATA_W-1:0] d;
    for (int i = 0; i < DATA_W / 32; i++) d[i*32 +: 32] = 32'(b) * 32'h9E37_79B9 + 32'(i);
    return d;
  endfunction

  // tile monitor
  always @(negedge clk) if (rst_n) begin
    tile_ready <= 1'($urandom % 8 != 0);
    #1;
    if (tile_valid && tile_ready) begin
      check(pending.exists(bid(tile.b)), "tile beat was requested, once");
      pending.delete(bid(tile.b));
      if (tile.dropped) begin
        check(tile.data == '0, "dropped beat is zero");
        check(!protect.exists(bid(tile.b)), "non-droppable burst kept");
        n_zero++;
      end else begin
        check(tile.data == data_of(tile.b.baddr), "beat carries DRAM data");
        n_data++;
      end
    end
  end

  task automatic expect_req(input logic [ADDR_W-1:0] addr, input int bytes,
                            input logic [TAG_W-1:0] tag, input bit prot);
    for (int b = 0; b < (bytes + 63) / 64; b++) begin
      longint id;
      id = {longint'(tag), 28'((addr >> 6) + ADDR_W'(b))};
      pending[id] = 1;
      if (prot) begin protect[id] = 1; n_prot++; end
    end
  endtask

  lignn_stats_t s0;
  int act0;
  task automatic run(input string name, input int lo, input int hi, output int acts);
    n_data = 0; n_zero = 0; n_prot = 0;
    s0 = stats; act0 = activations;
    for (int i = 0; i < NE; i++) expect_req(FEAT_BASE + ADDR_W'(src_of[i]) * FBYTES, FBYTES, TAG_W'(i), 0);
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
        @(negedge clk); edge_valid = 0;
      end
      begin
        // weight reads, not droppable, tags above the edge range
        for (int j = 0; j < 20; j++) begin
          repeat (40) @(negedge clk);
          req_valid = 1;
          req.addr = W_BASE + ADDR_W'(j) * 256;
          req.size = 16'd256;
          req.tag = TAG_W'(100000 + j);
          req.droppable = 0;
          expect_req(req.addr, 256, req.tag, 1);
          #1;
          while (!req_ready) begin @(negedge clk); #1; end
          @(negedge clk); req_valid = 0;
        end
      end
    join
    @(negedge clk); flush = 1;
    while (busy) @(negedge clk);
    @(negedge clk); flush = 0;
    // wait for the last DRAM results, at most 2000 cycles
    repeat (2000) begin
      if (pending.size() == 0) break;
      @(negedge clk);
    end
    check(pending.size() == 0, $sformatf("%s: %0d beats missing", name, pending.size()));
    acts = activations - act0;
    begin
      int share;
      share = (n_zero * 1000) / (n_data + n_zero - n_prot);
      $display("%s: data %0d zero %0d share %0d/1000 activations %0d | fires %0d rowkeep %0d rowdrop %0d bdrop %0d stalls %0d bypass %0d periods %0d",
               name, n_data, n_zero, share, acts, stats.fires - s0.fires, stats.row_keeps - s0.row_keeps,
               stats.row_drops - s0.row_drops, stats.burst_drops - s0.burst_drops,
               stats.stalls - s0.stalls, stats.bypasses - s0.bypasses, stats.periods - s0.periods);
      check(share >= lo && share <= hi, $sformatf("%s: dropped share %0d/1000", name, share));
    end
    pending.delete(); protect.delete();
  endtask

  localparam int NA = 5;
  localparam logic [7:0] ALPHAS [NA] = '{8'd26, 8'd77, 8'd128, 8'd179, 8'd230};

  initial begin
    int a_ref, prev, acts, target;
    edge_valid = 0; req_valid = 0; flush = 0; edge_in = '0; req = '0;
    for (int i = 0; i < NE; i++) src_of[i] = VID_W'($urandom % 512);
    cfg = '0;
    cfg.merge.feat_base = FEAT_BASE; cfg.merge.fshift = 5'd10; cfg.merge.range = 16'd256;
    cfg.filter.row.n = 16'd128; cfg.filter.row.crit_min = 8'd17;
    cfg.filter.trig.mode = TRIG_CUSTOM; cfg.filter.trig.tbl_thresh = 8'd48;
    cfg.filter.trig.q_thresh = 8'd32; cfg.filter.trig.cnt_thresh = 16'd512;
    cfg.filter.trig.time_thresh = 16'd200;
    repeat (3) @(posedge clk);
    rst_n = 1;

    run("no dropout", 0, 0, a_ref);
    prev = a_ref;
    cfg.filter.row_en = 1; cfg.merge.merge_en = 1;
    for (int k = 0; k < NA; k++) begin
      cfg.filter.row.alpha = ALPHAS[k];
      target = int'(ALPHAS[k]) * 1000 / 256;
      run($sformatf("LG-T alpha=%0d/256", ALPHAS[k]), target - 60, target + 60, acts);
      check(acts * 100 <= prev * 102,
            $sformatf("activations %0d at alpha %0d/256, %0d one step lower", acts, ALPHAS[k], prev));
      prev = acts;
    end
    check(prev * 4 < a_ref, $sformatf("alpha 0.9 opens %0d rows vs %0d without dropout", prev, a_ref));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
