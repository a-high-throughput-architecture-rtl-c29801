// tuple_div -- on-line tuple division of an M-bit sub-tree (Algorithm 1).
//
// The recursive division cuts a sub-tree at stage m into the largest
// sub-trees that are single-unreliable-bit tuples of one of the classes the
// hardware accepts: only frozen bits (SP2), only reliable bits (SP2), an
// unreliable first bit followed by reliable bits (SP1), or one unreliable bit
// among frozen bits (rate-1/T).  A single bit is always a tuple.  Because
// every half of an accepted tuple is itself accepted, visiting the tuples
// left to right and taking at offset `off` the largest aligned accepted
// sub-tree gives the same division as the top-down recursion; this module
// does that step combinationally.  Outputs: t = log2 of the tuple size, its
// class and the position q of its unreliable bit inside the tuple.
module tuple_div
  import lscd_pkg::*;
#(
  parameter int M = 8,
  localparam int MB = (M > 1) ? $clog2(M) : 1,
  localparam int MS = $clog2(M)
) (
  input  bit_class_e    cls [M],        // classes of the sub-tree's bits
  input  logic [MB-1:0] off,            // first bit not yet decoded
  output logic [MB:0]   t,
  output tuple_e        kind,
  output logic [MB-1:0] q
);
  always_comb begin
    t    = '0;
    kind = TUP_SP2_FRZ;
    q    = '0;
    for (int s = 0; s <= MS; s++) begin
      // sizes are tried from small to large so that the largest wins
      int n_frz, n_rrl, n_url, pos;
      logic first_url, aligned;
      n_frz = 0; n_rrl = 0; n_url = 0; pos = 0;
      aligned   = (int'(off) % (1 << s)) == 0;
      first_url = 1'b0;
      for (int j = 0; j < M; j++) begin
        if (j >= int'(off) && j < int'(off) + (1 << s) && j < M) begin
          unique case (cls[j])
            BIT_FRZ: n_frz++;
            BIT_RRL: n_rrl++;
            default: begin
              n_url++;
              pos = j - int'(off);
              if (j == int'(off)) first_url = 1'b1;
            end
          endcase
        end
      end
      if (aligned && int'(off) + (1 << s) <= M) begin
        if (n_frz == (1 << s)) begin
          t = (MB+1)'(s); kind = TUP_SP2_FRZ; q = '0;
        end else if (n_rrl == (1 << s)) begin
          t = (MB+1)'(s); kind = TUP_SP2_RRL; q = '0;
        end else if (n_url == 1 && first_url && n_rrl == (1 << s) - 1) begin
          t = (MB+1)'(s); kind = TUP_SP1; q = '0;
        end else if (n_url == 1 && n_frz == (1 << s) - 1) begin
          t = (MB+1)'(s); kind = TUP_R1T; q = MB'(pos);
        end
      end
    end
  end
endmodule
