// lignn_pkg: shared constants and types of the locality-aware dropout and
// merge unit.
//
// The address layout follows the HBM example of the design: bits 5:0 select
// the byte inside a 64-byte burst, bits 13:9 the column, and a DRAM row spans
// 16 KiB of address space, so the row identifier is the address above bit 13.
// Bits 8:6 are taken here as channel/bank interleave bits; they stay in the
// burst address but not in the row key.  Address width (40 bits, enough for the feature matrix of a
// 1.1e8-vertex graph), tag width,
// vertex-id width (27 bits, enough for 1.1e8 vertices) and the Q0.8 encoding
// of drop rates are choices of this implementation.
package lignn_pkg;

  localparam int unsigned ADDR_W    = 40;  // byte address (1 TiB)
  localparam int unsigned BURST_LSB = 6;   // 64-byte burst
  localparam int unsigned COL_LSB   = 9;   // column bits 13:9
  localparam int unsigned COL_MSB   = 13;
  localparam int unsigned ROW_LSB   = 14;  // 16 KiB row (row id = addr >> 14)
  localparam int unsigned BADDR_W   = ADDR_W - BURST_LSB;   // burst address
  localparam int unsigned ROWID_W   = ADDR_W - ROW_LSB;     // row identifier
  localparam int unsigned SIZE_W    = 16;  // request size in bytes
  localparam int unsigned TAG_W     = 27;  // request tag (a vertex id)
  localparam int unsigned VID_W     = 27;  // vertex id
  localparam int unsigned DATA_W    = 512; // one burst of data
  localparam int unsigned FRAC_W    = 8;   // drop rates are alpha * 256

  // Feature read request, as issued by the accelerator or the merger.
  typedef struct packed {
    logic [ADDR_W-1:0] addr;
    logic [SIZE_W-1:0] size;       // bytes, > 0
    logic [TAG_W-1:0]  tag;
    logic              droppable;  // may be dropped by the filter
  } rd_req_t;

  // One DRAM burst access.
  typedef struct packed {
    logic [BADDR_W-1:0] baddr;     // address >> BURST_LSB
    logic [TAG_W-1:0]   tag;
  } burst_t;

  // Burst with its address vector, as produced by the address mapper.
  typedef struct packed {
    burst_t             b;
    logic [ROWID_W-1:0] row;       // LGT key
    logic               droppable;
    logic               last;      // last burst of its request
  } mapped_burst_t;

  // Aggregation edge: neighbour src is read for destination dst.
  typedef struct packed {
    logic [VID_W-1:0] src;
    logic [VID_W-1:0] dst;
  } edge_t;

  // DRAM read result.
  typedef struct packed {
    burst_t             b;
    logic [DATA_W-1:0]  data;
  } dram_rsp_t;

  // Beat of a dense tile handed to the accelerator.
  typedef struct packed {
    burst_t             b;
    logic [DATA_W-1:0]  data;      // zero when dropped
    logic               dropped;   // dropout mask bit for this burst
  } tile_beat_t;

  // Trigger configuration.
  typedef enum logic [0:0] {
    TRIG_PER_REQUEST = 1'b0,       // fire after every request (LG-R)
    TRIG_CUSTOM      = 1'b1        // fire on thresholds (LG-S, LG-T)
  } trig_mode_e;

  typedef struct packed {
    trig_mode_e  mode;
    logic [7:0]  tbl_thresh;       // fire when table size >= this
    logic [7:0]  q_thresh;         // fire when the written queue size >= this
    logic [15:0] cnt_thresh;       // fire after this many inserted bursts
    logic [15:0] time_thresh;      // fire after this many idle cycles
  } trig_cfg_t;

  // Row dropout (Algorithm 2) configuration.
  typedef struct packed {
    logic [FRAC_W-1:0] alpha;      // drop rate * 256
    logic [15:0]       n;          // desired output size in bursts
    logic [7:0]        crit_min;   // criteria C: min queue length to keep
  } row_cfg_t;

  typedef struct packed {
    logic              burst_en;   // burst filter on
    logic [FRAC_W-1:0] burst_alpha;
    logic              row_en;     // LGT + trigger + row dropout on
    row_cfg_t          row;
    trig_cfg_t         trig;
    logic              range_en;   // requests in [drop_lo, drop_hi) are droppable
    logic [ADDR_W-1:0] drop_lo;
    logic [ADDR_W-1:0] drop_hi;
  } filter_cfg_t;

  typedef struct packed {
    logic              merge_en;   // locality-aware merging on (LG-T)
    logic [ADDR_W-1:0] feat_base;  // feature matrix start address S
    logic [4:0]        fshift;     // log2(feature bytes) = log2(N*4)
    logic [15:0]       range;      // edges per REC table output period
  } merge_cfg_t;

  typedef struct packed {
    merge_cfg_t  merge;
    filter_cfg_t filter;
  } lignn_cfg_t;

  // Event counters of the whole unit.
  typedef struct packed {
    logic [31:0] dram_bursts;    // bursts sent to DRAM
    logic [31:0] dropped_bursts; // zero beats returned
    logic [31:0] burst_drops;    // bursts dropped by the burst filter
    logic [31:0] row_keeps;      // queues kept by row dropout
    logic [31:0] row_drops;      // queues dropped by row dropout
    logic [31:0] fires;          // trigger firings
    logic [31:0] stalls;         // cycles a burst waited on an output call
    logic [31:0] bypasses;       // bursts that skipped the LGT
    logic [31:0] periods;        // REC table output periods
  } lignn_stats_t;

  // Galois LFSR step (taps for x^32+x^22+x^2+x+1).
  function automatic logic [31:0] lfsr32_next(input logic [31:0] s);
    return {1'b0, s[31:1]} ^ (s[0] ? 32'h8020_0003 : 32'h0);
  endfunction

endpackage
