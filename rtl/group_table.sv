// group_table: the locality group table (LGT), a content-addressable table
// whose key is a DRAM row identifier and whose value is a FIFO of entries.
//
// An insert looks its key up in all ENTRIES keys in parallel.  On a hit the
// item is appended to that entry's FIFO; on a miss the lowest-numbered free
// entry is claimed for the key.  The insert is refused (ins_ready = 0) when
// the hit queue is full or, on a miss, when no entry is free.  The table
// reports, combinationally, which entries are in use, every queue's size,
// the number of entries in use, and the size the written queue will have.
// A drain port reads the head of any entry (pop_idx) and removes it on
// pop; an entry is freed when its queue becomes empty.  Insert and pop may
// happen in the same cycle, also on the same entry.
//
// Organisation (CAM + FIFO, 64 x 32 for the main configuration) follows
// the design; allocation order, refusal on full, and flip-flop storage in
// place of memory macros are choices of this implementation.  The same
// table holds edge queues in the REC table of the merger.
module group_table #(
  parameter int unsigned ENTRIES = 64,
  parameter int unsigned DEPTH   = 32,
  parameter int unsigned KEY_W   = 20,
  parameter int unsigned DATA_W  = 61,
  localparam int unsigned IDX_W  = (ENTRIES > 1) ? $clog2(ENTRIES) : 1,
  localparam int unsigned PTR_W  = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned CNT_W  = $clog2(DEPTH + 1),
  localparam int unsigned USED_W = $clog2(ENTRIES + 1)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // insert
  input  logic                       ins_valid,
  output logic                       ins_ready,
  input  logic [KEY_W-1:0]           ins_key,
  input  logic [DATA_W-1:0]          ins_data,
  output logic [CNT_W-1:0]           ins_qsize,   // size after this insert
  // status
  output logic [ENTRIES-1:0]         valid_o,
  output logic [ENTRIES-1:0][CNT_W-1:0] cnt_o,
  output logic [USED_W-1:0]          used_o,
  // drain
  input  logic                       pop,
  input  logic [IDX_W-1:0]           pop_idx,
  output logic [DATA_W-1:0]          head_o
);

  logic [ENTRIES-1:0][KEY_W-1:0] key_q;
  logic [ENTRIES-1:0]            vld_q;
  logic [ENTRIES-1:0][CNT_W-1:0] cnt_q;
  logic [ENTRIES-1:0][PTR_W-1:0] rd_q, wr_q;
  logic [DATA_W-1:0]             mem_q [ENTRIES*DEPTH];

  // CAM lookup and free-entry search.
  logic             hit, has_free;
  logic [IDX_W-1:0] hit_idx, free_idx, ins_idx;
  always_comb begin
    hit = 1'b0;      hit_idx  = '0;
    has_free = 1'b0; free_idx = '0;
    for (int i = ENTRIES - 1; i >= 0; i--) begin
      if (vld_q[i] && key_q[i] == ins_key) begin
        hit = 1'b1;
        hit_idx = IDX_W'(i);
      end
      if (!vld_q[i]) begin
        has_free = 1'b1;
        free_idx = IDX_W'(i);
      end
    end
  end

  // A queue emptied by a pop this cycle keeps its key only if the insert
  // hits it; otherwise it is freed and not reused until the next cycle.
  assign ins_idx   = hit ? hit_idx : free_idx;
  assign ins_ready = hit ? (cnt_q[hit_idx] != CNT_W'(DEPTH) ||
                            (pop && pop_idx == hit_idx))
                         : has_free;
  assign ins_qsize = hit ? cnt_q[hit_idx] + CNT_W'(1) -
                           CNT_W'(pop && pop_idx == hit_idx)
                         : CNT_W'(1);

  logic do_ins, do_pop;
  assign do_ins = ins_valid && ins_ready;
  assign do_pop = pop && vld_q[pop_idx];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      vld_q <= '0;
      cnt_q <= '0;
      rd_q  <= '0;
      wr_q  <= '0;
      key_q <= '0;
    end else begin
      for (int i = 0; i < ENTRIES; i++) begin
        logic inc, dec;
        logic [CNT_W-1:0] nxt;
        inc = do_ins && ins_idx == IDX_W'(i);
        dec = do_pop && pop_idx == IDX_W'(i);
        nxt = cnt_q[i] + CNT_W'(inc) - CNT_W'(dec);
        cnt_q[i] <= nxt;
        vld_q[i] <= (nxt != '0);
        if (inc) begin
          wr_q[i] <= (wr_q[i] == PTR_W'(DEPTH - 1)) ? '0 : wr_q[i] + PTR_W'(1);
          if (!vld_q[i]) key_q[i] <= ins_key;
        end
        if (dec)
          rd_q[i] <= (rd_q[i] == PTR_W'(DEPTH - 1)) ? '0 : rd_q[i] + PTR_W'(1);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (do_ins) mem_q[int'(ins_idx) * DEPTH + int'(wr_q[ins_idx])] <= ins_data;
  end

  assign head_o  = mem_q[int'(pop_idx) * DEPTH + int'(rd_q[pop_idx])];
  assign valid_o = vld_q;
  assign cnt_o   = cnt_q;

  always_comb begin
    used_o = '0;
    for (int i = 0; i < ENTRIES; i++) used_o += USED_W'(vld_q[i]);
  end

  // Pops only from entries in use.
  a_pop: assert property (@(posedge clk) disable iff (!rst_n) pop |-> vld_q[pop_idx]);

endmodule
