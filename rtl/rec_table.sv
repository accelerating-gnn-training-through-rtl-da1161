// rec_table: table of edge queues keyed by row hash, output periodically.
//
// Hashed edges are appended to the queue of their row hash (a CAM + FIFO
// table, group_table).  An output period ends when `range` edges have been
// inserted since the last period, when an insert is refused because a
// queue or the table is full, or while flush is high.  The table is then
// emptied queue by queue, lowest entry first, so edges whose neighbour
// features share a DRAM row leave back to back; grp_last marks the last
// edge of each queue.  Insertion stalls while the table is being emptied.
// The CAM + FIFO organisation and periodic output follow the design; the
// table size (taken equal to the LGT), the period rule and the queue order
// are choices of this implementation.
//
// Interface: valid/ready streams.  Timing: one edge per cycle in and out;
// output starts two cycles after the period ends.
module rec_table
  import lignn_pkg::*;
#(
  parameter int unsigned ENTRIES = 64,
  parameter int unsigned DEPTH   = 32
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [15:0]        range_i,
  input  logic               flush_i,
  input  logic               in_valid,
  output logic               in_ready,
  input  logic [ROWID_W-1:0] in_hash,
  input  edge_t              in_edge,
  output logic               out_valid,
  input  logic               out_ready,
  output edge_t              out_edge,
  output logic               out_grp_last,
  output logic               busy_o,       // edges are held
  output logic               ev_period     // an output period starts
);

  localparam int unsigned IDX_W  = (ENTRIES > 1) ? $clog2(ENTRIES) : 1;
  localparam int unsigned CNT_W  = $clog2(DEPTH + 1);
  localparam int unsigned USED_W = $clog2(ENTRIES + 1);

  typedef enum logic [1:0] {S_FILL, S_SEL, S_OUT} state_e;
  state_e state_q;

  logic                          t_ins_v, t_ins_r;
  logic [CNT_W-1:0]              t_qsize;
  logic [ENTRIES-1:0]            t_valid;
  logic [ENTRIES-1:0][CNT_W-1:0] t_cnt;
  logic [USED_W-1:0]             t_used;
  logic                          t_pop;
  logic [IDX_W-1:0]              sel_q;
  logic [$bits(edge_t)-1:0]      t_head;
  logic [15:0]                   n_q;

  assign t_ins_v  = in_valid && (state_q == S_FILL);
  assign in_ready = t_ins_r && (state_q == S_FILL);

  group_table #(.ENTRIES(ENTRIES), .DEPTH(DEPTH), .KEY_W(ROWID_W),
                .DATA_W($bits(edge_t)))
  u_tab (
    .clk, .rst_n,
    .ins_valid(t_ins_v), .ins_ready(t_ins_r), .ins_key(in_hash),
    .ins_data(in_edge), .ins_qsize(t_qsize),
    .valid_o(t_valid), .cnt_o(t_cnt), .used_o(t_used),
    .pop(t_pop), .pop_idx(sel_q), .head_o(t_head));

  // Lowest entry in use.
  logic             any;
  logic [IDX_W-1:0] first;
  always_comb begin
    any = 1'b0; first = '0;
    for (int i = ENTRIES - 1; i >= 0; i--)
      if (t_valid[i]) begin any = 1'b1; first = IDX_W'(i); end
  end

  logic period_end;
  assign period_end = (t_used != '0) &&
                      ((t_ins_v && !t_ins_r) || flush_i ||
                       (range_i != '0 && n_q >= range_i));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state_q <= S_FILL;
      sel_q   <= '0;
      n_q     <= '0;
    end else begin
      unique case (state_q)
        S_FILL: begin
          if (period_end) begin
            state_q <= S_SEL;
            n_q     <= '0;
          end else if (t_ins_v && t_ins_r) n_q <= n_q + 16'd1;
        end
        S_SEL: begin
          if (any) begin sel_q <= first; state_q <= S_OUT; end
          else state_q <= S_FILL;
        end
        S_OUT: if (out_valid && out_ready && t_cnt[sel_q] == CNT_W'(1))
          state_q <= S_SEL;
        default: state_q <= S_FILL;
      endcase
    end
  end

  assign out_valid    = (state_q == S_OUT);
  assign out_edge     = edge_t'(t_head);
  assign out_grp_last = (t_cnt[sel_q] == CNT_W'(1));
  assign t_pop        = out_valid && out_ready;
  assign busy_o       = (t_used != '0) || (state_q != S_FILL);
  assign ev_period    = (state_q == S_FILL) && period_end;

endmodule
