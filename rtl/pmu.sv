// pmu -- path-metric update block of one path for one tuple of the M-bit
// sub-tree handled by the list-management (LM) module.
//
// Inputs are the M LLRs of the path at stage m (root of the sub-tree), the
// bits the path already decided inside this sub-tree (u_sub), and the tuple
// to decode: offset o, size T = 2^t and its class.  The block
//   1. walks down from stage m to stage t through m stages of programmable
//      PEs (stage s has 2^s PEs).  A node that is a left child gets F, a right
//      child gets G with the partial sums of its left sibling, computed from
//      u_sub.  This is the PE triangle of the published PMU; here the walk is
//      combinational so that LLR calculation and PMU share one cycle, as the
//      simplified MB-DTS schedule assumes.
//   2. forms the two candidate encoded vectors A (unreliable bit 0) and B
//      (unreliable bit 1) without maximum-likelihood search, because the
//      tuple is always one of the classes the paper restricts itself to:
//        SP2 frozen   : A = 0              (one path, no expansion)
//        SP2 reliable : A = hard decisions (no penalty)
//        SP1          : unreliable bit first, all others reliable; the hard
//                       decisions with the least reliable position k flipped
//                       when needed to give even (A) or odd (B) parity
//        rate-1/T     : one unreliable bit at position q, others frozen;
//                       A = 0 and B = row q of the polar transform
//   3. feeds the vectors to the sub-PMU of size T (one per size 1..M, output
//      selected by t) and returns the two ordered metrics and the decided
//      bits u = v * F^t of both candidates.
// Combinational.
module pmu
  import lscd_pkg::*;
#(
  parameter int M = 8,
  localparam int MB = (M > 1) ? $clog2(M) : 1,
  localparam int MS = $clog2(M)           // m = log2(M)
) (
  input  llr_t [M-1:0] llr_m,             // stage-m LLRs of the path
  input  logic [M-1:0] u_sub,             // bits already decided in the sub-tree
  input  logic [MB-1:0] off,              // tuple offset inside the sub-tree
  input  logic [MB:0]   t,                // log2 of the tuple size
  input  tuple_e        kind,             // tuple class
  input  logic [MB-1:0] q,                // position of the unreliable bit (rate-1/T)
  input  pm_t           gamma,
  output pm_t           theta,            // smaller updated metric
  output pm_t           pm_max,           // larger updated metric
  output logic          b_first,          // theta belongs to candidate B
  output pm_t           pm_a,             // metric of candidate A
  output logic [M-1:0]  u_a,              // decided bits of A (bit j = tuple bit j)
  output logic [M-1:0]  u_b
);
  // LLRs of the node containing the tuple at every stage s (2^s values used)
  llr_t [M-1:0] lv [MS+1];
  logic [M-1:0] ps_s [MS];

  assign lv[MS] = llr_m;

  for (genvar s = 0; s < MS; s++) begin : g_stage
    logic [MB:0] qn;                      // node index at stage s
    logic [63:0] lsib;
    always_comb begin
      qn   = (MB+1)'(off >> s);
      // left sibling of a right child starts at (qn - 1) * 2^s = (qn & ~1) * 2^s
      lsib = 64'(u_sub >> ((qn & ~(MB+1)'(1)) << s));
      ps_s[s] = M'(polar_enc(lsib, s));
    end
    for (genvar i = 0; i < (1 << s); i++) begin : g_pe
      llr_t unused0, unused2;
      ppe u_pe (
        .i0(lv[s+1][i]), .i1(lv[s+1][i]), .i2(lv[s+1][i + (1 << s)]), .i3(lv[s+1][i + (1 << s)]),
        .sel_a(1'b0), .sel_b(1'b0), .glah(1'b0), .is_f(~qn[0]), .ps(ps_s[s][i]),
        .o0(unused0), .o1(lv[s][i]), .o2(unused2)
      );
    end
    for (genvar i = (1 << s); i < M; i++) begin : g_pad
      assign lv[s][i] = '0;
    end
  end

  // candidate vectors
  logic [M-1:0] alpha, beta, hd;
  llr_t [M-1:0] tl;
  always_comb begin
    logic par;
    int   k;
    mag_t best;
    tl    = lv[0];
    for (int s = 0; s <= MS; s++) if (t == (MB+1)'(s)) tl = lv[s];
    hd    = '0;
    par   = 1'b0;
    k     = 0;
    best  = MAG_MAX;
    for (int j = 0; j < M; j++) begin
      if (j < (1 << t)) begin
        hd[j] = tl[j].sgn;
        par   = par ^ tl[j].sgn;
        if (j == 0 || tl[j].mag < best) begin
          best = tl[j].mag;
          k    = j;
        end
      end
    end
    unique case (kind)
      TUP_SP2_FRZ: begin alpha = '0; beta = '0; end
      TUP_SP2_RRL: begin alpha = hd; beta = hd; end
      TUP_SP1: begin
        alpha = hd;
        beta  = hd;
        if (par) alpha[k] = ~alpha[k];
        else     beta[k]  = ~beta[k];
      end
      default: begin                      // TUP_R1T
        alpha = '0;
        beta  = M'(polar_enc(64'(1) << q, int'(t)));
      end
    endcase
    u_a = M'(polar_enc(64'(alpha), int'(t)));
    u_b = M'(polar_enc(64'(beta),  int'(t)));
  end

  // one sub-PMU per tuple size, output chosen by t
  pm_t  th_t [MS+1], mx_t [MS+1], da_t [MS+1];
  logic bf_t [MS+1];
  for (genvar s = 0; s <= MS; s++) begin : g_sub
    pm_t db_unused;
    sub_pmu #(.T(1 << s)) u_sub_pmu (
      .llr(tl[(1 << s)-1:0]), .alpha(alpha[(1 << s)-1:0]), .beta(beta[(1 << s)-1:0]),
      .gamma(gamma), .theta(th_t[s]), .pm_max(mx_t[s]), .b_first(bf_t[s]),
      .delta_a(da_t[s]), .delta_b(db_unused)
    );
  end

  always_comb begin
    theta   = th_t[0];
    pm_max  = mx_t[0];
    b_first = bf_t[0];
    pm_a    = pm_sat_add(gamma, da_t[0]);
    for (int s = 0; s <= MS; s++)
      if (t == (MB+1)'(s)) begin
        theta   = th_t[s];
        pm_max  = mx_t[s];
        b_first = bf_t[s];
        pm_a    = pm_sat_add(gamma, da_t[s]);
      end
  end
endmodule
