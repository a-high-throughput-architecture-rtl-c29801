// sub_pmu -- T-input sub-PMU: path-metric update of one path for a T-bit
// tuple whose two candidate encoded vectors are known.
//
// Stage 1: penalty Delta_A = sum_j (alpha_j XOR sign(L_j)) * |L_j| and, in
//          parallel, Delta_B with beta (XOR gate, AND gate, T-input adder).
// Stage 2: both penalties are added to the path's metric gamma.
// Stage 3: the two updated metrics are compared (Delta_A > Delta_B) and
//          returned ordered: theta = gamma + min(Delta) (used for sorting) and
//          pm_max = gamma + max(Delta).  b_first = 1 says theta belongs to B.
// The three stages follow the published sub-PMU structure; they are one
// combinational block here (the tuple LLRs come from the same cycle).
// All additions saturate at the largest path metric (our choice).
module sub_pmu
  import lscd_pkg::*;
#(
  parameter int T = 8
) (
  input  llr_t [T-1:0] llr,       // LLRs of the tuple at stage t = log2(T)
  input  logic [T-1:0] alpha,     // encoded vector A (unreliable bit = 0)
  input  logic [T-1:0] beta,      // encoded vector B (unreliable bit = 1)
  input  pm_t          gamma,     // metric of the path before the tuple
  output pm_t          theta,     // gamma + Delta_min
  output pm_t          pm_max,    // gamma + Delta_max
  output logic         b_first,   // 1: Delta_B < Delta_A
  output pm_t          delta_a,
  output pm_t          delta_b
);
  pm_t pa, pb;

  always_comb begin
    delta_a = '0;
    delta_b = '0;
    for (int j = 0; j < T; j++) begin
      delta_a = pm_sat_add(delta_a, (alpha[j] ^ llr[j].sgn) ? pm_t'(llr[j].mag) : '0);
      delta_b = pm_sat_add(delta_b, (beta[j]  ^ llr[j].sgn) ? pm_t'(llr[j].mag) : '0);
    end
    pa      = pm_sat_add(gamma, delta_a);
    pb      = pm_sat_add(gamma, delta_b);
    b_first = delta_a > delta_b;
    theta   = b_first ? pb : pa;
    pm_max  = b_first ? pa : pb;
  end
endmodule
