// row_drop_ctrl: row-granularity dropout with the DRAM row integrity
// policy (the output call of the locality group table).
//
// Each trigger starts one output call.  The call keeps counters k (bursts
// kept) and d (bursts dropped) and repeats, while the table is not empty
// and k + d < n:
//   if delta + (k+d)*alpha - d > 0, move the shortest queue to the drop
//   output and add its size to d; otherwise move the longest queue that
//   meets criteria C to the keep output and add its size to k.
// At the end, delta += (k+d)*alpha - d.  delta persists across calls, so
// over time the dropped share of bursts tracks alpha while whole DRAM rows
// are kept or dropped.  Ties between equal queues are broken at random by
// the comparison trees.  This is the algorithm of the design; here alpha
// is an 8-bit fraction and delta is held multiplied by 256.  Criteria C is
// a minimum queue length for keeping; when no queue meets it the longest
// queue is kept, so a call always makes progress (own choice).
//
// Timing: one cycle (PICK) to choose a queue, then one burst per cycle
// while the chosen output accepts (DRAIN).  busy_o is high from the cycle
// after fire_i until the call ends; the table must not change except
// through this block's pops while busy_o is high.  The burst on the keep
// or drop output is the table's head_i, read by the consumer directly.
module row_drop_ctrl
  import lignn_pkg::*;
#(
  parameter int unsigned ENTRIES = 64,
  parameter int unsigned DEPTH   = 32,
  parameter int unsigned DW      = 61,
  parameter int unsigned DELTA_W = 24,
  parameter logic [31:0] SEED    = 32'h5EED_0B0E,
  localparam int unsigned IDX_W  = (ENTRIES > 1) ? $clog2(ENTRIES) : 1,
  localparam int unsigned CNT_W  = $clog2(DEPTH + 1)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  row_cfg_t                      cfg,
  input  logic                          fire_i,
  output logic                          busy_o,
  // table state and drain port
  input  logic [ENTRIES-1:0]            valid_i,
  input  logic [ENTRIES-1:0][CNT_W-1:0] cnt_i,
  output logic                          pop_o,
  output logic [IDX_W-1:0]              pop_idx_o,
  input  logic [DW-1:0]             head_i,
  // long queue output (keep) and short queue output (drop)
  output logic                          keep_valid,
  input  logic                          keep_ready,
  output logic                          drop_valid,
  input  logic                          drop_ready,
  // observability
  output logic signed [DELTA_W-1:0]     delta_o,
  output logic                          pick_drop_o,  // a queue is dropped
  output logic                          pick_keep_o   // a queue is kept
);

  typedef enum logic [1:0] {S_IDLE, S_PICK, S_DRAIN} state_e;
  state_e state_q;

  logic signed [DELTA_W-1:0] delta_q;
  logic [16:0]               k_q, d_q;
  logic [IDX_W-1:0]          sel_q;
  logic                      sel_drop_q;
  logic [31:0]               lfsr_q;

  localparam int unsigned P = 1 << ((ENTRIES > 1) ? $clog2(ENTRIES) : 1);
  logic [P-1:0] rnd_min, rnd_max;
  always_comb begin
    for (int i = 0; i < P; i++) begin
      rnd_min[i] = lfsr_q[i % 32];
      rnd_max[i] = lfsr_q[(i + 7) % 32];
    end
  end

  // Shortest queue, longest queue meeting C, longest queue overall.
  logic [ENTRIES-1:0] fits_c;
  always_comb
    for (int i = 0; i < ENTRIES; i++)
      fits_c[i] = valid_i[i] && (32'(cnt_i[i]) >= 32'(cfg.crit_min));

  logic             min_f, maxc_f, maxa_f;
  logic [IDX_W-1:0] min_i, maxc_i, maxa_i;
  logic [CNT_W-1:0] min_v, maxc_v, maxa_v;

  cmp_tree #(.N(ENTRIES), .W(CNT_W), .FIND_MAX(1'b0)) u_min (
    .val_i(cnt_i), .elig_i(valid_i), .rnd_i(rnd_min),
    .found_o(min_f), .idx_o(min_i), .val_o(min_v));
  cmp_tree #(.N(ENTRIES), .W(CNT_W), .FIND_MAX(1'b1)) u_maxc (
    .val_i(cnt_i), .elig_i(fits_c), .rnd_i(rnd_max),
    .found_o(maxc_f), .idx_o(maxc_i), .val_o(maxc_v));
  cmp_tree #(.N(ENTRIES), .W(CNT_W), .FIND_MAX(1'b1)) u_maxa (
    .val_i(cnt_i), .elig_i(valid_i), .rnd_i(rnd_max),
    .found_o(maxa_f), .idx_o(maxa_i), .val_o(maxa_v));

  // Balance test of Algorithm 2, scaled by 256:
  //   256*delta + (k+d)*alpha - 256*d > 0, with delta_q already scaled.
  logic signed [DELTA_W+1:0] bal;
  assign bal = $signed({{2{delta_q[DELTA_W-1]}}, delta_q})
             + $signed((DELTA_W+2)'((32'(k_q) + 32'(d_q)) * 32'(cfg.alpha)))
             - $signed((DELTA_W+2)'({d_q, 8'd0}));

  logic table_empty, done;
  assign table_empty = (valid_i == '0);
  assign done        = table_empty || (32'(k_q) + 32'(d_q) >= 32'(cfg.n));

  logic go_drop;
  assign go_drop = (bal > 0);

  logic out_fire;
  assign out_fire = sel_drop_q ? (drop_valid && drop_ready)
                               : (keep_valid && keep_ready);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state_q    <= S_IDLE;
      delta_q    <= '0;
      k_q        <= '0;
      d_q        <= '0;
      sel_q      <= '0;
      sel_drop_q <= 1'b0;
      lfsr_q     <= SEED;
    end else begin
      lfsr_q <= lfsr32_next(lfsr_q);
      unique case (state_q)
        S_IDLE: if (fire_i) begin
          k_q     <= '0;
          d_q     <= '0;
          state_q <= S_PICK;
        end
        S_PICK: begin
          if (done) begin
            delta_q <= DELTA_W'(bal);
            state_q <= S_IDLE;
          end else if (go_drop) begin
            sel_q      <= min_i;
            sel_drop_q <= 1'b1;
            d_q        <= d_q + 17'(min_v);
            state_q    <= S_DRAIN;
          end else begin
            sel_q      <= maxc_f ? maxc_i : maxa_i;
            sel_drop_q <= 1'b0;
            k_q        <= k_q + 17'(maxc_f ? maxc_v : maxa_v);
            state_q    <= S_DRAIN;
          end
        end
        S_DRAIN: if (out_fire && cnt_i[sel_q] == CNT_W'(1)) state_q <= S_PICK;
        default: state_q <= S_IDLE;
      endcase
    end
  end

  assign busy_o      = (state_q != S_IDLE);
  assign pop_idx_o   = sel_q;
  assign pop_o       = out_fire;
  assign keep_valid  = (state_q == S_DRAIN) && !sel_drop_q;
  assign drop_valid  = (state_q == S_DRAIN) &&  sel_drop_q;
  assign delta_o     = delta_q;
  assign pick_drop_o = (state_q == S_PICK) && !done &&  go_drop;
  assign pick_keep_o = (state_q == S_PICK) && !done && !go_drop;

  a_drain_valid: assert property (@(posedge clk) disable iff (!rst_n)
                                  state_q == S_DRAIN |-> valid_i[sel_q]);
  a_found: assert property (@(posedge clk) disable iff (!rst_n)
                            state_q == S_PICK && !done |-> min_f && maxa_f);

endmodule
