// fake_zero_merge: builds the dense-tile stream for the accelerator from
// real DRAM data and fake zeros.
//
// Bursts that were kept come back from DRAM with their data; bursts that
// were dropped (by the burst filter or by row dropout) arrive on the drop
// input without data.  Both become beats of one output stream: a dropped
// burst becomes an all-zero beat with dropped = 1, which also serves as the
// dropout mask bit for the backward pass.  Returning zeros for dropped
// data and a per-beat drop flag follows the design; the round-robin choice
// between the two inputs when both are waiting is this implementation's.
// Scaling by 1/(1-alpha) is left to the compute units.
//
// Interface: valid/ready streams; the path is combinational (no latency).
module fake_zero_merge
  import lignn_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       rsp_valid,
  output logic       rsp_ready,
  input  dram_rsp_t  rsp,
  input  logic       drop_valid,
  output logic       drop_ready,
  input  burst_t     drop,
  output logic       tile_valid,
  input  logic       tile_ready,
  output tile_beat_t tile
);

  logic last_rsp_q;   // the previous grant went to the DRAM input
  logic grant_rsp;

  always_comb begin
    if (rsp_valid && drop_valid) grant_rsp = !last_rsp_q;
    else                         grant_rsp = rsp_valid;
  end

  assign tile_valid = rsp_valid || drop_valid;
  assign rsp_ready  = tile_ready &&  grant_rsp;
  assign drop_ready = tile_ready && !grant_rsp && drop_valid;

  always_comb begin
    if (grant_rsp) begin
      tile.b       = rsp.b;
      tile.data    = rsp.data;
      tile.dropped = 1'b0;
    end else begin
      tile.b       = drop;
      tile.data    = '0;
      tile.dropped = 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n)                        last_rsp_q <= 1'b0;
    else if (tile_valid && tile_ready) last_rsp_q <= grant_rsp;
  end

  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           tile_valid && !tile_ready |=> tile_valid);

endmodule
