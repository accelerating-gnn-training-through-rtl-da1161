// burst_filter: burst-granularity dropout (filter B of the locality filter).
//
// Each burst that passes through is either kept (sent on towards the
// locality group table) or dropped (sent to the fake-zero merge).  The
// decision is a Bernoulli trial with probability alpha/256, drawn from a
// 32-bit Galois LFSR that advances once per burst handled, which mirrors
// the random distributions of algorithmic dropout.  Bursts of requests not
// marked droppable are always kept, and with en = 0 every burst is kept.
// Weighting the decision by the burst's effective ratio or by load balance
// is not built.
//
// Interface: valid/ready in, two valid/ready outputs (keep, drop); the
// path is combinational, no cycle of latency; the burst itself is not
// copied, the consumer reads it from the input bus.  The decision for the burst
// at the input is fixed until it is accepted.
module burst_filter
  import lignn_pkg::*;
#(
  parameter logic [31:0] SEED = 32'h1ACE_B00C
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              en,
  input  logic [FRAC_W-1:0] alpha,
  input  logic              in_valid,
  output logic              in_ready,
  input  mapped_burst_t     in_bst,
  output logic              keep_valid,
  input  logic              keep_ready,
  output logic              drop_valid,
  input  logic              drop_ready
);

  logic [31:0] lfsr_q;
  logic        drop_it;

  assign drop_it    = en && in_bst.droppable && (lfsr_q[FRAC_W-1:0] < alpha);
  assign keep_valid = in_valid && !drop_it;
  assign drop_valid = in_valid &&  drop_it;
  assign in_ready   = drop_it ? drop_ready : keep_ready;

  always_ff @(posedge clk) begin
    if (!rst_n)                    lfsr_q <= SEED;
    else if (in_valid && in_ready) lfsr_q <= lfsr32_next(lfsr32_next(
                                             lfsr32_next(lfsr32_next(
                                             lfsr32_next(lfsr32_next(
                                             lfsr32_next(lfsr32_next(lfsr_q))))))));
  end

endmodule
