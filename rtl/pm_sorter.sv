// pm_sorter -- threshold extraction for the double-thresholding scheme.
//
// Given the L metrics of the surviving paths (or, for a tuple with two
// penalised branches, the L values theta = min of each path's two expanded
// metrics), the acceptance threshold AT is the (L/2)-th smallest value and
// the rejection threshold RT the RT_IDX-th smallest (0-based).  The plain
// scheme takes RT at rank L-1; the default here is the earlier rank used by
// the hardware-oriented variant of the scheme (6, 12, 25 for L = 8, 16, 32).
// Invalid (not yet populated) list entries sort as +infinity: the key is
// {~valid, metric}.  The sorter ranks every entry by counting the entries
// that precede it (smaller key, or equal key and lower index) and picks the
// entries of rank L/2 and RT_IDX.  The paper only says a sorter is used; this
// one-cycle rank counter (L*(L-1) comparators) is our own, simplest choice.
// Combinational.
module pm_sorter
  import lscd_pkg::*;
#(
  parameter int L      = 32,
  parameter int RT_IDX = (L == 32) ? 25 : (L == 16) ? 12 : (L == 8) ? 6 : L - 1
) (
  input  pm_t          pm    [L],
  input  logic [L-1:0] valid,
  output logic [QPM:0] at_key,       // {~valid, metric} of rank L/2
  output logic [QPM:0] rt_key        // {~valid, metric} of rank RT_IDX
);
  logic [QPM:0] key  [L];
  int unsigned  rank [L];

  always_comb begin
    for (int i = 0; i < L; i++) key[i] = {~valid[i], pm[i]};
    at_key = '1;
    rt_key = '1;
    for (int i = 0; i < L; i++) begin
      rank[i] = 0;
      for (int j = 0; j < L; j++)
        if (key[j] < key[i] || (key[j] == key[i] && j < i)) rank[i]++;
    end
    for (int i = 0; i < L; i++) begin
      if (rank[i] == L / 2)  at_key = key[i];
      if (rank[i] == RT_IDX) rt_key = key[i];
    end
  end
endmodule
