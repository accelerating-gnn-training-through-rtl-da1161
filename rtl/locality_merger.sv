// locality_merger: locality-aware merging of neighbour feature reads.
//
// Each edge (src, dst) of the aggregation edge list names a neighbour src
// whose feature must be read.  The REC hasher maps src to the DRAM row
// that holds the start of its feature; the REC table groups edges by that
// row and releases them periodically, so reads that hit the same row are
// issued back to back.  Every edge leaving the table becomes one feature
// read request (address of src's feature, 2^fshift bytes, tag = dst,
// droppable).  No edge is dropped: merging only reorders.  With merge_en
// low the table is bypassed and edges are turned into requests in order.
// This structure follows the design; the request format and the bypass
// are choices of this implementation.
//
// Interface: valid/ready streams.  The table stores only the edge; a
// second hasher on the output side recomputes the feature address (its
// row hash output is not needed there).  Every request is marked
// droppable, so that output bit is constant 1: neighbour feature reads
// are the reads dropout applies to.
module locality_merger
  import lignn_pkg::*;
#(
  parameter int unsigned ENTRIES = 64,
  parameter int unsigned DEPTH   = 32
) (
  input  logic       clk,
  input  logic       rst_n,
  input  merge_cfg_t cfg,
  input  logic       flush,
  input  logic       edge_valid,
  output logic       edge_ready,
  input  edge_t      edge_in,
  output logic       req_valid,
  input  logic       req_ready,
  output rd_req_t    req,
  output logic       busy,
  output logic       ev_period
);

  // Hash on the input side.
  logic [ROWID_W-1:0] in_hash;
  logic [ADDR_W-1:0]  in_faddr;
  rec_hasher u_hash_in (
    .vid_i(edge_in.src), .feat_base_i(cfg.feat_base), .fshift_i(cfg.fshift),
    .hash_o(in_hash), .faddr_o(in_faddr));

  logic  t_in_v, t_in_r, t_out_v, t_out_r, t_last;
  edge_t t_out;
  assign t_in_v = edge_valid && cfg.merge_en;

  rec_table #(.ENTRIES(ENTRIES), .DEPTH(DEPTH)) u_tab (
    .clk, .rst_n, .range_i(cfg.range), .flush_i(flush),
    .in_valid(t_in_v), .in_ready(t_in_r), .in_hash(in_hash), .in_edge(edge_in),
    .out_valid(t_out_v), .out_ready(t_out_r), .out_edge(t_out),
    .out_grp_last(t_last), .busy_o(busy), .ev_period);

  // Feature address of the edge leaving the table.
  logic [ROWID_W-1:0] out_hash;
  logic [ADDR_W-1:0]  out_faddr;
  rec_hasher u_hash_out (
    .vid_i(t_out.src), .feat_base_i(cfg.feat_base), .fshift_i(cfg.fshift),
    .hash_o(out_hash), .faddr_o(out_faddr));

  // Table output has priority; in bypass mode the table drains and then
  // stays empty.
  edge_t             sel_edge;
  logic [ADDR_W-1:0] sel_addr;
  always_comb begin
    if (t_out_v) begin
      req_valid = 1'b1;
      sel_edge  = t_out;
      sel_addr  = out_faddr;
    end else begin
      req_valid = edge_valid && !cfg.merge_en;
      sel_edge  = edge_in;
      sel_addr  = in_faddr;
    end
    req.addr      = sel_addr;
    req.size      = SIZE_W'(1) << cfg.fshift;
    req.tag       = TAG_W'(sel_edge.dst);
    req.droppable = 1'b1;
  end

  assign t_out_r    = req_ready;
  assign edge_ready = cfg.merge_en ? t_in_r : (req_ready && !t_out_v);

endmodule
