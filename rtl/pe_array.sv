// pe_array -- the P programmable PEs that serve one decoding path.
//
// All PEs of an array run the same operation in the same cycle (one SC node,
// or P functions of it).  PE i receives the pair (a_i, b_i) of a node: in
// two-input mode a_i is its I.0 and b_i its I.2; when the inputs are
// look-ahead candidates, a0/a1 and b0/b1 are the candidates for partial sum
// 0 and 1 and sel_a/sel_b pick one of each per PE.  The look-ahead mode
// (glah) returns F, G(ps=0) and G(ps=1) for every pair; the normal mode
// returns F or G(ps_i) on o1.  Combinational; the caller registers outputs.
module pe_array
  import lscd_pkg::*;
#(
  parameter int P = 64
) (
  input  llr_t [P-1:0] a0,
  input  llr_t [P-1:0] a1,
  input  llr_t [P-1:0] b0,
  input  llr_t [P-1:0] b1,
  input  logic [P-1:0] sel_a,
  input  logic [P-1:0] sel_b,
  input  logic       glah,
  input  logic       is_f,
  input  logic [P-1:0] ps,
  output llr_t [P-1:0] o0,
  output llr_t [P-1:0] o1,
  output llr_t [P-1:0] o2
);
  for (genvar i = 0; i < P; i++) begin : g_pe
    ppe u_pe (
      .i0(a0[i]), .i1(a1[i]), .i2(b0[i]), .i3(b1[i]),
      .sel_a(sel_a[i]), .sel_b(sel_b[i]),
      .glah(glah), .is_f(is_f), .ps(ps[i]),
      .o0(o0[i]), .o1(o1[i]), .o2(o2[i])
    );
  end
endmodule
