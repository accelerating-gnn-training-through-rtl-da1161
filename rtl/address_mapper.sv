// address_mapper: turns one feature read request into the DRAM bursts it
// covers and labels each burst with its address vector.
//
// A request gives a byte address and a byte size.  The mapper walks the
// 64-byte bursts from the burst holding the first byte to the burst holding
// the last byte, one burst per clock, and tags each with the row identifier
// (address bits above ROW_LSB), which is the key of the locality group
// table.  The last burst of a request carries last = 1.  Splitting a
// request into bursts along the DRAM mapping follows the design; the
// one-burst-per-cycle rate and the field widths are choices of this
// implementation.  No address translation is applied.
//
// Interface: valid/ready on both sides.  req_ready is high only when the
// mapper is idle, so a request is held until its last burst has left.
// Timing: the first burst appears the cycle after the request is accepted;
// a request of B bursts occupies the mapper for B cycles.
module address_mapper
  import lignn_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          req_valid,
  output logic          req_ready,
  input  rd_req_t       req,
  output logic          bst_valid,
  input  logic          bst_ready,
  output mapped_burst_t bst
);

  logic               busy_q;
  logic [BADDR_W-1:0] cur_q, last_q;
  logic [TAG_W-1:0]   tag_q;
  logic               drop_q;

  logic [BADDR_W-1:0] end_burst;   // burst holding the last byte
  assign end_burst = BADDR_W'((req.addr + ADDR_W'(req.size) - ADDR_W'(1)) >> BURST_LSB);
  assign req_ready = !busy_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy_q <= 1'b0;
      cur_q  <= '0;
      last_q <= '0;
      tag_q  <= '0;
      drop_q <= 1'b0;
    end else if (req_valid && req_ready) begin
      busy_q <= 1'b1;
      cur_q  <= req.addr[ADDR_W-1:BURST_LSB];
      last_q <= end_burst;
      tag_q  <= req.tag;
      drop_q <= req.droppable;
    end else if (bst_valid && bst_ready) begin
      if (cur_q == last_q) busy_q <= 1'b0;
      cur_q <= cur_q + BADDR_W'(1);
    end
  end

  always_comb begin
    bst_valid     = busy_q;
    bst.b.baddr   = cur_q;
    bst.b.tag     = tag_q;
    bst.row       = cur_q[BADDR_W-1:ROW_LSB-BURST_LSB];
    bst.droppable = drop_q;
    bst.last      = (cur_q == last_q);
  end

  // A request of zero bytes has no bursts.
  a_size: assert property (@(posedge clk) disable iff (!rst_n)
                           req_valid |-> req.size != '0);
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           bst_valid && !bst_ready |=> bst_valid && $stable(bst));

endmodule
