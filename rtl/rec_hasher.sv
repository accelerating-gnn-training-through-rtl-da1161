// rec_hasher: row-equivalence-class (REC) hash of a neighbour vertex.
//
// With the feature matrix at byte address S and every feature vector
// 2^fshift bytes long (N float32 values, N a power of two), the feature of
// vertex v starts at S + v * 2^fshift.  Two neighbours' features share a
// DRAM row exactly when their start addresses lie in the same row, so the
// hash is the row number of the start address, (S + (v << fshift)) >>
// ROW_LSB.  For the HBM example of the design (16 KiB rows, S aligned to
// 4 KiB, N = 256) this reduces to comparing v with its three low bits
// cleared.  The formula follows the design; taking the layout as two
// configuration values is this implementation's choice.
//
// Purely combinational.
module rec_hasher
  import lignn_pkg::*;
(
  input  logic [VID_W-1:0]   vid_i,
  input  logic [ADDR_W-1:0]  feat_base_i,  // S
  input  logic [4:0]         fshift_i,     // log2(feature bytes)
  output logic [ROWID_W-1:0] hash_o,
  output logic [ADDR_W-1:0]  faddr_o      // feature start address
);

  assign faddr_o = feat_base_i + (ADDR_W'(vid_i) << fshift_i);
  assign hash_o  = faddr_o[ADDR_W-1:ROW_LSB];

endmodule
