// trigger: decides when the locality group table is output (trigger F).
//
// The table notifies the trigger of every burst it accepts, of the table
// size and of the size of the queue just written, as the design specifies.
// In per-request mode (LG-R) the trigger fires once the last burst of a
// feature request has been accepted.  In custom mode (LG-S, LG-T) it fires
// when the table size or the written queue size reaches its threshold,
// when cnt_thresh bursts have been accepted since the last firing, or when
// the table has held bursts for time_thresh cycles without firing.  In
// both modes it also fires when an insert is refused because a queue or
// the table is full, and while flush is high with a non-empty table; these
// two keep the table from blocking and are choices of this
// implementation, as are the threshold registers.  A threshold of zero is
// disabled.
//
// Timing: fire_o is a one-cycle pulse, registered, issued the cycle after
// the event and never while busy_i (an output call in progress) is high.
// The burst and idle counters restart at each firing.
module trigger
  import lignn_pkg::*;
#(
  parameter int unsigned USED_W = 7,
  parameter int unsigned CNT_W  = 6
) (
  input  logic              clk,
  input  logic              rst_n,
  input  trig_cfg_t         cfg,
  input  logic [USED_W-1:0] used_i,     // table size (entries in use)
  input  logic [CNT_W-1:0]  qsize_i,    // size of the queue being written
  input  logic              ins_fire_i, // a burst is accepted this cycle
  input  logic              ins_last_i, // ... and it ends its request
  input  logic              blocked_i,  // an insert is refused this cycle
  input  logic              flush_i,
  input  logic              busy_i,
  output logic              fire_o
);

  logic [15:0] cnt_q, idle_q;
  logic        pend_q;      // event seen, waiting for busy_i to drop
  logic        event_now;

  always_comb begin
    event_now = 1'b0;
    if (blocked_i) event_now = 1'b1;
    if (flush_i && used_i != '0) event_now = 1'b1;
    if (cfg.mode == TRIG_PER_REQUEST) begin
      if (ins_fire_i && ins_last_i) event_now = 1'b1;
    end else begin
      if (cfg.tbl_thresh != '0 && 32'(used_i) >= 32'(cfg.tbl_thresh))
        event_now = 1'b1;
      if (ins_fire_i && cfg.q_thresh != '0 &&
          32'(qsize_i) >= 32'(cfg.q_thresh))
        event_now = 1'b1;
      if (ins_fire_i && cfg.cnt_thresh != '0 &&
          cnt_q + 16'd1 >= cfg.cnt_thresh)
        event_now = 1'b1;
      if (cfg.time_thresh != '0 && used_i != '0 && idle_q >= cfg.time_thresh)
        event_now = 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      fire_o <= 1'b0;
      pend_q <= 1'b0;
      cnt_q  <= '0;
      idle_q <= '0;
    end else begin
      fire_o <= 1'b0;
      if ((event_now || pend_q) && !busy_i && !fire_o) begin
        fire_o <= 1'b1;
        pend_q <= 1'b0;
        cnt_q  <= '0;
        idle_q <= '0;
      end else begin
        if (event_now) pend_q <= 1'b1;
        if (ins_fire_i) cnt_q <= cnt_q + 16'd1;
        if (used_i != '0 && !busy_i && idle_q != 16'hFFFF) idle_q <= idle_q + 16'd1;
      end
    end
  end

endmodule
