// ppe -- programmable processing element of the SC cores.
//
// One PE evaluates the SC node functions on sign-magnitude LLRs:
//   F(La,Lb)    = sign(La)^sign(Lb) , min(|La|,|Lb|)          (min-sum)
//   G(La,Lb,ps) = (-1)^ps * La + Lb
// It has the three-part structure of the published programmable PE:
//   * input stage: La is picked from I.0 / I.1 by sel_a and Lb from I.2 / I.3
//     by sel_b.  With two inputs only I.0 and I.2 are used (sel = 0); with
//     four pre-computed (look-ahead) candidates the selects are the partial
//     sums of the previous stage.
//   * calculating stage: one adder for |La|+|Lb| and two subtractors for
//     |La|-|Lb| and |Lb|-|La|.  The borrow chi of |Lb|-|La| picks min_ab and
//     the non-negative difference dif_ab, so only one adder sits on any path.
//   * output stage: in look-ahead (glah) mode O.0 = F, O.1 = G with ps = 0 and
//     O.2 = G with ps = 1; in normal mode only O.1 is used and carries F
//     (is_f = 1) or G with partial sum ps.
// Purely combinational.  The magnitude sum saturates at the largest
// magnitude (our choice; the paper does not say how overflow is handled).
// The assignment of G(ps=0) to O.1 and G(ps=1) to O.2 is our reading of the
// figure; the paper states only that O.1 goes to the memories in both modes.
module ppe
  import lscd_pkg::*;
(
  input  llr_t i0, i1, i2, i3,   // I.0 .. I.3
  input  logic sel_a,            // 0: La = I.0, 1: La = I.1
  input  logic sel_b,            // 0: Lb = I.2, 1: Lb = I.3
  input  logic glah,             // 1: look-ahead mode, three outputs
  input  logic is_f,             // normal mode: 1 = F node, 0 = G node
  input  logic ps,               // normal mode G: partial sum
  output llr_t o0, o1, o2
);
  llr_t la, lb;
  logic xor_ab, chi, sgn_max, sgn_rev;
  mag_t min_ab, dif_ab, sum_ab;
  logic [QMAG:0] d_ba, d_ab;
  llr_t f_out, g0_out, g1_out;

  always_comb begin
    // input stage
    la = sel_a ? i1 : i0;
    lb = sel_b ? i3 : i2;
    // calculating stage
    xor_ab  = la.sgn ^ lb.sgn;
    d_ba    = {1'b0, lb.mag} - {1'b0, la.mag};   // |Lb| - |La|
    d_ab    = {1'b0, la.mag} - {1'b0, lb.mag};   // |La| - |Lb|
    chi     = d_ba[QMAG];                        // 1 when |La| > |Lb|
    min_ab  = chi ? lb.mag : la.mag;
    dif_ab  = chi ? d_ab[QMAG-1:0] : d_ba[QMAG-1:0];
    sum_ab  = mag_sat_add(la.mag, lb.mag);
    sgn_max = chi ? la.sgn : lb.sgn;              // sign of the larger magnitude
    sgn_rev = chi ? ~la.sgn : lb.sgn;             // same, with La negated
    // candidate outputs
    f_out  = '{sgn: xor_ab, mag: min_ab};
    g0_out = xor_ab ? '{sgn: sgn_max, mag: dif_ab} : '{sgn: lb.sgn, mag: sum_ab};
    g1_out = xor_ab ? '{sgn: lb.sgn, mag: sum_ab}  : '{sgn: sgn_rev, mag: dif_ab};
    // output stage
    o0 = f_out;
    o2 = g1_out;
    if (glah)      o1 = g0_out;
    else if (is_f) o1 = f_out;
    else           o1 = ps ? g1_out : g0_out;
  end
endmodule
