// cmp_tree: complete binary comparison tree that finds the smallest
// (FIND_MAX = 0) or largest (FIND_MAX = 1) value among the eligible leaves
// and returns its index.
//
// The N leaves are padded to the next power of two with ineligible leaves.
// Each internal node compares its two children: an eligible child beats an
// ineligible one, otherwise the smaller (or larger) value wins, and on a
// tie the node's own random bit picks the side.  The tree structure and
// the random choice on ties follow the design; the tree is purely
// combinational, log2(N) comparator levels deep.
//
// Interface: val_i / elig_i per leaf, rnd_i one bit per internal node
// (bit k is used by node k, nodes numbered 1 .. P-1 from the root in heap
// order, bit 0 unused).  found_o is low when no leaf is eligible.
module cmp_tree #(
  parameter int unsigned N        = 64,
  parameter int unsigned W        = 6,
  parameter bit          FIND_MAX = 1'b0,
  localparam int unsigned IDX_W   = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned P       = 1 << IDX_W   // leaves after padding
) (
  input  logic [N-1:0][W-1:0] val_i,
  input  logic [N-1:0]        elig_i,
  input  logic [P-1:0]        rnd_i,
  output logic                found_o,
  output logic [IDX_W-1:0]    idx_o,
  output logic [W-1:0]        val_o
);

  // Heap-ordered node arrays: node 1 is the root, leaves are P .. 2P-1.
  logic [2*P-1:1]            n_el;
  logic [2*P-1:1][W-1:0]     n_val;
  logic [2*P-1:1][IDX_W-1:0] n_idx;

  always_comb begin
    for (int l = 0; l < P; l++) begin
      n_el [P+l] = (l < N) ? elig_i[l] : 1'b0;
      n_val[P+l] = (l < N) ? val_i[l]  : '0;
      n_idx[P+l] = IDX_W'(l);
    end
    for (int k = P - 1; k >= 1; k--) begin
      logic take_r, better_r, tie;
      tie      = n_val[2*k+1] == n_val[2*k];
      better_r = FIND_MAX ? (n_val[2*k+1] > n_val[2*k])
                          : (n_val[2*k+1] < n_val[2*k]);
      if (!n_el[2*k])        take_r = 1'b1;
      else if (!n_el[2*k+1]) take_r = 1'b0;
      else                   take_r = better_r || (tie && rnd_i[k]);
      n_el [k] = n_el[2*k] || n_el[2*k+1];
      n_val[k] = take_r ? n_val[2*k+1] : n_val[2*k];
      n_idx[k] = take_r ? n_idx[2*k+1] : n_idx[2*k];
    end
  end

  assign found_o = n_el[1];
  assign idx_o   = n_idx[1];
  assign val_o   = n_val[1];

endmodule
