// lignn_top: locality-aware dropout and merge unit placed between a GNN
// training accelerator and DRAM.
//
// The accelerator's aggregation edge list enters the locality merger,
// which reorders neighbour reads so reads of one DRAM row are issued
// together and turns each edge into a feature read request.  Requests
// (plus any other dense reads on req_*, which take priority) pass through
// the locality filter: burst dropout, grouping by DRAM row in the locality
// group table, and row dropout under the row integrity policy.  Kept
// bursts go to DRAM on dram_req_*; DRAM results and dropped bursts meet in
// the fake-zero merge, which returns one beat per burst on tile_* (zeros
// and dropped = 1 for dropped bursts).  The chain merger -> filter ->
// DRAM, DRAM / drop -> fake-zero merge -> dense tiles follows the design's
// architecture; the second request input and the statistics counters are
// this implementation's additions.
//
// Configuration is static during operation.  flush empties both tables
// (end of a layer); busy is low when no request is held inside.  All
// streams are valid/ready; the DRAM side may return results in any order,
// each beat is identified by its burst address and tag.
module lignn_top
  import lignn_pkg::*;
#(
  parameter int unsigned ENTRIES   = 64,   // LGT entries
  parameter int unsigned DEPTH     = 32,   // bursts per LGT queue
  parameter int unsigned M_ENTRIES = 64,   // REC table entries
  parameter int unsigned M_DEPTH   = 32    // edges per REC table queue
) (
  input  logic         clk,
  input  logic         rst_n,
  input  lignn_cfg_t   cfg,
  input  logic         flush,
  // aggregation edge list from the accelerator
  input  logic         edge_valid,
  output logic         edge_ready,
  input  edge_t        edge_in,
  // other dense read requests from the accelerator
  input  logic         req_valid,
  output logic         req_ready,
  input  rd_req_t      req,
  // DRAM read requests and results
  output logic         dram_req_valid,
  input  logic         dram_req_ready,
  output burst_t       dram_req,
  input  logic         dram_rsp_valid,
  output logic         dram_rsp_ready,
  input  dram_rsp_t    dram_rsp,
  // dense tiles to the accelerator
  output logic         tile_valid,
  input  logic         tile_ready,
  output tile_beat_t   tile,
  output logic         busy,
  output logic signed [23:0] delta,  // row dropout balance, x256
  output lignn_stats_t stats
);

  // locality merger
  logic    mg_req_v, mg_req_r, mg_busy, ev_period;
  rd_req_t mg_req;
  locality_merger #(.ENTRIES(M_ENTRIES), .DEPTH(M_DEPTH)) u_merger (
    .clk, .rst_n, .cfg(cfg.merge), .flush,
    .edge_valid, .edge_ready, .edge_in,
    .req_valid(mg_req_v), .req_ready(mg_req_r), .req(mg_req),
    .busy(mg_busy), .ev_period);

  // request selection: direct requests first
  logic    f_req_v, f_req_r;
  rd_req_t f_req;
  assign f_req_v   = req_valid || mg_req_v;
  assign f_req     = req_valid ? req : mg_req;
  assign req_ready = f_req_r;
  assign mg_req_r  = f_req_r && !req_valid;

  // The filter is flushed once the merger has released everything.
  logic f_flush;
  assign f_flush = flush && !mg_busy && !edge_valid;

  // locality filter
  logic   drop_v, drop_r, f_busy;
  burst_t drop_b;
  logic   ev_bdrop, ev_rkeep, ev_rdrop, ev_fire, ev_stall, ev_bypass;
  locality_filter #(.ENTRIES(ENTRIES), .DEPTH(DEPTH)) u_filter (
    .clk, .rst_n, .cfg(cfg.filter), .flush(f_flush),
    .req_valid(f_req_v), .req_ready(f_req_r), .req(f_req),
    .keep_valid(dram_req_valid), .keep_ready(dram_req_ready), .keep(dram_req),
    .drop_valid(drop_v), .drop_ready(drop_r), .drop(drop_b),
    .busy(f_busy),
    .ev_burst_drop(ev_bdrop), .ev_row_keep(ev_rkeep), .ev_row_drop(ev_rdrop),
    .ev_fire, .ev_stall, .ev_bypass, .delta);

  // merge with fake zero
  fake_zero_merge u_fzm (
    .clk, .rst_n,
    .rsp_valid(dram_rsp_valid), .rsp_ready(dram_rsp_ready), .rsp(dram_rsp),
    .drop_valid(drop_v), .drop_ready(drop_r), .drop(drop_b),
    .tile_valid, .tile_ready, .tile);

  assign busy = mg_busy || f_busy;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      stats <= '0;
    end else begin
      if (dram_req_valid && dram_req_ready) stats.dram_bursts <= stats.dram_bursts + 1;
      if (drop_v && drop_r)                 stats.dropped_bursts <= stats.dropped_bursts + 1;
      if (ev_bdrop)  stats.burst_drops <= stats.burst_drops + 1;
      if (ev_rkeep)  stats.row_keeps   <= stats.row_keeps + 1;
      if (ev_rdrop)  stats.row_drops   <= stats.row_drops + 1;
      if (ev_fire)   stats.fires       <= stats.fires + 1;
      if (ev_stall)  stats.stalls      <= stats.stalls + 1;
      if (ev_bypass) stats.bypasses    <= stats.bypasses + 1;
      if (ev_period) stats.periods     <= stats.periods + 1;
    end
  end

endmodule
