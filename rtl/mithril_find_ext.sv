// mithril_find_ext: the "Find Max Logic" of the Mithril table, also used
// (FIND_MAX = 0) to find the minimum.
//
// Every counter is first turned into its distance above 'base', the current
// table minimum, by a modulo-2^CNT_W subtraction.  Because all counters are
// at or above the minimum and no two differ by 2^CNT_W or more, these
// distances order the entries correctly even after counters have wrapped.
// A balanced binary tree of comparators then reduces the N_ENTRY distances
// to the largest (or smallest) one and its index; on a tie the higher index
// wins.  The tree is padded to a power of two with leaves that never win.
//
// Timing: purely combinational, depth log2(N_ENTRY) comparators.  The paper
// only names this block; the relative compare and the tree are this
// design's choices.  The tie rule follows the paper's worked example, whose
// two printed ties (MaxPtr on the second of two 9s, MinPtr on the last of
// two 2s) both point at the later entry.
module mithril_find_ext #(
  parameter int unsigned N_ENTRY  = 256,
  parameter int unsigned CNT_W    = 12,
  parameter bit          FIND_MAX = 1'b1,
  localparam int unsigned IDX_W   = (N_ENTRY > 1) ? $clog2(N_ENTRY) : 1
) (
  input  logic [CNT_W-1:0] counts [N_ENTRY],
  input  logic [CNT_W-1:0] base,
  output logic [IDX_W-1:0] ext_idx,
  output logic [CNT_W-1:0] ext_rel
);

  localparam int unsigned NP = 1 << IDX_W;   // leaves, padded to a power of two

  // node 1 is the root, nodes NP..2*NP-1 are the leaves
  logic             nd_ok  [2*NP];
  logic [CNT_W-1:0] nd_val [2*NP];
  logic [IDX_W-1:0] nd_idx [2*NP];

  always_comb begin
    nd_ok[0]  = 1'b0;
    nd_val[0] = '0;
    nd_idx[0] = '0;
    for (int unsigned i = 0; i < NP; i++) begin
      nd_ok [NP+i] = (i < N_ENTRY);
      nd_val[NP+i] = (i < N_ENTRY) ? counts[i] - base : '0;
      nd_idx[NP+i] = IDX_W'(i);
    end
    for (int unsigned n = NP - 1; n >= 1; n--) begin
      logic take_right;
      if (!nd_ok[2*n])            take_right = nd_ok[2*n+1];
      else if (!nd_ok[2*n+1])     take_right = 1'b0;
      else if (FIND_MAX)          take_right = nd_val[2*n+1] >= nd_val[2*n];
      else                        take_right = nd_val[2*n+1] <= nd_val[2*n];
      nd_ok [n] = nd_ok[2*n] | nd_ok[2*n+1];
      nd_val[n] = take_right ? nd_val[2*n+1] : nd_val[2*n];
      nd_idx[n] = take_right ? nd_idx[2*n+1] : nd_idx[2*n];
    end
  end

  assign ext_idx = nd_idx[1];
  assign ext_rel = nd_val[1];

endmodule
