// ps_network -- partial-sum memory, permutation and update for L paths.
//
// For every path the network keeps the partial sums that later G nodes at
// stages m .. n-1 need: stage s owns bits [2^s, 2^(s+1)) of an N-bit vector
// and holds the encoded bits of the left child of the stage-(s+1) node that
// is currently being decoded.  When the LM module finishes a sub-tree j at
// stage m, each new entry l
//   1. takes the partial sums of the entry it descends from, perm[l]
//      (the crossbar of the partial-sum network),
//   2. encodes its sub-tree bits, x = u_sub * F^m, and climbs the tree: while
//      the node is a right child, x = [ps_s XOR x, x] and one stage up; at the
//      first left child x is stored as that stage's partial sums.
// One update per clock (upd).  All partial sums are registers here; the paper
// keeps all but P bits of each path in a P-bit-wide SRAM, which changes only
// the storage, not the values.
module ps_network
  import lscd_pkg::*;
#(
  parameter int N = 1024,
  parameter int L = 32,
  parameter int M = 8,
  localparam int LW = (L > 1) ? $clog2(L) : 1,
  localparam int NS = $clog2(N),
  localparam int MS = $clog2(M)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clr,               // new frame
  input  logic          upd,
  input  logic [NS-MS-1:0] sub_idx,        // index j of the finished sub-tree
  input  logic [LW-1:0] perm  [L],
  input  logic [M-1:0]  u_sub [L],
  output logic [N-1:0]  ps    [L]
);
  logic [N-1:0] ps_n [L];

  always_comb begin
    for (int l = 0; l < L; l++) begin
      logic [N-1:0] x, src, y;
      logic stop;
      src  = ps[perm[l]];
      x    = '0;
      x[M-1:0] = M'(polar_enc(64'(u_sub[l]), MS));
      stop = 1'b0;
      y    = '0;
      ps_n[l] = src;
      for (int s = MS; s < NS; s++) begin
        if (!stop) begin
          if (sub_idx[s - MS] == 1'b0) begin
            for (int i = 0; i < N; i++)
              if (i < (1 << s)) ps_n[l][(1 << s) + i] = x[i];
            stop = 1'b1;
          end else begin
            y = '0;
            for (int i = 0; i < N / 2; i++)
              if (i < (1 << s)) begin
                y[i]            = src[(1 << s) + i] ^ x[i];
                y[(1 << s) + i] = x[i];
              end
            x = y;
          end
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < L; l++) ps[l] <= '0;
    end else if (clr) begin
      for (int l = 0; l < L; l++) ps[l] <= '0;
    end else if (upd) begin
      ps <= ps_n;
    end
  end
endmodule
