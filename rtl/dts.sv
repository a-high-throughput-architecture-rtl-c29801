// dts -- double-thresholding list pruning (2L expanded paths -> L paths).
//
// Expanded path k = 2l+b comes from parent l (b = 0: the smaller metric of
// the pair, b = 1: the larger one).  With key = {~valid, metric}:
//   key <  AT            : kept
//   AT <= key <= RT      : candidate, used to fill the list
//   key >  RT or invalid : pruned
// Kept paths take list slots first, in index order; candidates fill the
// remaining slots in index order.  Slots left over are invalid.  The paper
// fills the remaining slots with a random choice among the candidates; a
// fixed index order is this design's choice (it needs no random source).
// The compaction is a prefix count over the 2L flags followed by a one-hot
// slot match.  Combinational.  Assertion: never more than L kept paths.
module dts
  import lscd_pkg::*;
#(
  parameter int L  = 32,
  localparam int LW = (L > 1) ? $clog2(L) : 1
) (
  input  logic [L-1:0] valid,          // parent validity
  input  pm_t          pm0  [L],       // metric of expanded path 2l
  input  pm_t          pm1  [L],       // metric of expanded path 2l+1
  input  logic [QPM:0] at_key,
  input  logic [QPM:0] rt_key,
  output logic [L-1:0] nvalid,         // slot holds a path
  output logic [LW-1:0] parent [L],    // parent of the path in slot l
  output logic [L-1:0] branch,         // 0: expanded 2l, 1: expanded 2l+1
  output pm_t          npm   [L],
  output int unsigned  n_kept          // number of paths below AT
);
  localparam int E = 2 * L;
  logic [QPM:0] key  [E];
  logic         keep [E], cand [E];
  int unsigned  slot [E];
  int unsigned  c1, c2;

  always_comb begin
    for (int k = 0; k < E; k++) begin
      key[k]  = {~valid[k/2], (k % 2 == 0) ? pm0[k/2] : pm1[k/2]};
      keep[k] = valid[k/2] && (key[k] < at_key);
      cand[k] = valid[k/2] && !keep[k] && (key[k] <= rt_key);
    end
    c1 = 0;
    for (int k = 0; k < E; k++) begin
      slot[k] = c1;
      if (keep[k]) c1++;
    end
    n_kept = c1;
    c2 = c1;
    for (int k = 0; k < E; k++) begin
      if (cand[k]) begin
        slot[k] = c2;
        c2++;
      end
    end
    for (int l = 0; l < L; l++) begin
      nvalid[l] = 1'b0;
      parent[l] = '0;
      branch[l] = 1'b0;
      npm[l]    = PM_MAX;
      for (int k = 0; k < E; k++) begin
        if ((keep[k] || cand[k]) && slot[k] == l) begin
          nvalid[l] = 1'b1;
          parent[l] = LW'(k / 2);
          branch[l] = k[0];
          npm[l]    = key[k][QPM-1:0];
        end
      end
    end
  end
endmodule
