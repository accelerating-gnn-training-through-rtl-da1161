// locality_filter: locality-aware dropout of DRAM read bursts.
//
// A read request enters the address mapper, which emits its bursts with
// their DRAM row identifiers.  The burst filter drops bursts at random
// (burst dropout); survivors are grouped by row in the locality group
// table.  The trigger watches the table and starts output calls of the
// row dropout controller, which sends whole rows either to the keep
// output (to DRAM) or to the drop output (to the fake-zero merge).  This
// chain is the locality filter of the design.
//
// Two paths skip the table: bursts of requests not marked droppable, and,
// when the row filter is off (LG-B configuration), every burst that passes
// the burst filter.  They go straight to the keep output.
//
// Insertion into the table stalls from the cycle the trigger fires until
// the output call ends; the mapper then holds its burst.  flush makes the
// trigger fire until the table is empty, e.g. at the end of a layer.
//
// A request is droppable when its own flag says so or, with range_en set,
// when its start address lies in the configured range [drop_lo, drop_hi).
// The range is the fallback for a bus that cannot carry a flag per access.
//
// Interface: valid/ready streams; keep and drop carry burst_t.
module locality_filter
  import lignn_pkg::*;
#(
  parameter int unsigned ENTRIES = 64,
  parameter int unsigned DEPTH   = 32
) (
  input  logic        clk,
  input  logic        rst_n,
  input  filter_cfg_t cfg,
  input  logic        flush,
  input  logic        req_valid,
  output logic        req_ready,
  input  rd_req_t     req,
  output logic        keep_valid,
  input  logic        keep_ready,
  output burst_t      keep,
  output logic        drop_valid,
  input  logic        drop_ready,
  output burst_t      drop,
  output logic        busy,        // bursts are held in the filter
  // event strobes, for statistics
  output logic        ev_burst_drop,
  output logic        ev_row_keep,
  output logic        ev_row_drop,
  output logic        ev_fire,
  output logic        ev_stall,
  output logic        ev_bypass,
  output logic signed [23:0] delta     // row dropout balance (x256)
);

  localparam int unsigned IDX_W  = (ENTRIES > 1) ? $clog2(ENTRIES) : 1;
  localparam int unsigned CNT_W  = $clog2(DEPTH + 1);
  localparam int unsigned USED_W = $clog2(ENTRIES + 1);
  localparam int unsigned BW     = $bits(burst_t);

  // droppable flag or pre-configured droppable address range
  rd_req_t in_req;
  always_comb begin
    in_req = req;
    in_req.droppable = req.droppable ||
                       (cfg.range_en && req.addr >= cfg.drop_lo && req.addr < cfg.drop_hi);
  end

  // address mapper
  logic          m_valid, m_ready;
  mapped_burst_t m_bst;
  address_mapper u_map (
    .clk, .rst_n, .req_valid, .req_ready, .req(in_req),
    .bst_valid(m_valid), .bst_ready(m_ready), .bst(m_bst));

  // burst filter
  logic          bf_keep_v, bf_keep_r, bf_drop_v, bf_drop_r;
  burst_filter u_bf (
    .clk, .rst_n, .en(cfg.burst_en), .alpha(cfg.burst_alpha),
    .in_valid(m_valid), .in_ready(m_ready), .in_bst(m_bst),
    .keep_valid(bf_keep_v), .keep_ready(bf_keep_r),
    .drop_valid(bf_drop_v), .drop_ready(bf_drop_r));

  // Row controller state.
  logic rc_busy, fire;
  logic hold;                       // table side busy: stall insertion
  assign hold = rc_busy || fire;

  logic to_table;                   // kept burst goes into the LGT
  assign to_table = cfg.row_en && m_bst.droppable;

  // locality group table
  logic                          t_ins_v, t_ins_r;
  logic [CNT_W-1:0]              t_qsize;
  logic [ENTRIES-1:0]            t_valid;
  logic [ENTRIES-1:0][CNT_W-1:0] t_cnt;
  logic [USED_W-1:0]             t_used;
  logic                          t_pop;
  logic [IDX_W-1:0]              t_pop_idx;
  logic [BW-1:0]                 t_head;

  assign t_ins_v = bf_keep_v && to_table && !hold;

  group_table #(.ENTRIES(ENTRIES), .DEPTH(DEPTH), .KEY_W(ROWID_W), .DATA_W(BW))
  u_lgt (
    .clk, .rst_n,
    .ins_valid(t_ins_v), .ins_ready(t_ins_r), .ins_key(m_bst.row),
    .ins_data(m_bst.b), .ins_qsize(t_qsize),
    .valid_o(t_valid), .cnt_o(t_cnt), .used_o(t_used),
    .pop(t_pop), .pop_idx(t_pop_idx), .head_o(t_head));

  // trigger
  trigger #(.USED_W(USED_W), .CNT_W(CNT_W)) u_trig (
    .clk, .rst_n, .cfg(cfg.trig),
    .used_i(t_used), .qsize_i(t_qsize),
    .ins_fire_i(t_ins_v && t_ins_r), .ins_last_i(m_bst.last),
    .blocked_i(t_ins_v && !t_ins_r), .flush_i(flush && cfg.row_en),
    .busy_i(rc_busy), .fire_o(fire));

  // row dropout controller
  logic          rc_keep_v, rc_drop_v, rc_keep_r, rc_drop_r;
  logic          pick_drop, pick_keep;
  logic signed [23:0] rc_delta;
  row_drop_ctrl #(.ENTRIES(ENTRIES), .DEPTH(DEPTH), .DW(BW)) u_rc (
    .clk, .rst_n, .cfg(cfg.row), .fire_i(fire), .busy_o(rc_busy),
    .valid_i(t_valid), .cnt_i(t_cnt),
    .pop_o(t_pop), .pop_idx_o(t_pop_idx), .head_i(t_head),
    .keep_valid(rc_keep_v), .keep_ready(rc_keep_r),
    .drop_valid(rc_drop_v), .drop_ready(rc_drop_r),
    .delta_o(rc_delta), .pick_drop_o(pick_drop), .pick_keep_o(pick_keep));

  // Output muxing.  While a call runs the insertion side is stalled, so
  // the controller owns both outputs; otherwise the insertion side does.
  logic bypass_v;
  assign bypass_v = bf_keep_v && !to_table;

  always_comb begin
    if (rc_busy) begin
      keep_valid = rc_keep_v;
      keep       = t_head;
      drop_valid = rc_drop_v;
      drop       = t_head;
    end else begin
      keep_valid = bypass_v && !fire;
      keep       = m_bst.b;
      drop_valid = bf_drop_v && !fire;
      drop       = m_bst.b;
    end
  end

  assign rc_keep_r = rc_busy && keep_ready;
  assign rc_drop_r = rc_busy && drop_ready;
  assign bf_keep_r = hold ? 1'b0 : (to_table ? t_ins_r : keep_ready);
  assign bf_drop_r = !hold && drop_ready;

  assign busy          = m_valid || (t_used != '0) || rc_busy || fire;
  assign ev_burst_drop = bf_drop_v && bf_drop_r;
  assign ev_row_keep   = pick_keep;
  assign ev_row_drop   = pick_drop;
  assign ev_fire       = fire;
  assign ev_stall      = m_valid && hold;
  assign ev_bypass     = bypass_v && bf_keep_r;
  assign delta         = rc_delta;

endmodule
