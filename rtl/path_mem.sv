// path_mem -- decoded-bit memory of the L list paths.
//
// Entry l holds the N decided bits u_0 .. u_{N-1} of path l.  When the LM
// module finishes sub-tree j, every entry l takes the vector of the entry it
// descends from, perm[l] (path crossbar), and the M new bits u_sub[l] are
// written at positions jM .. jM+M-1 (the paper's shifter-based append; with
// a fixed position per sub-tree a write at that position is equivalent).
// One update per clock; cleared at the start of a frame.
module path_mem #(
  parameter int N = 1024,
  parameter int L = 32,
  parameter int M = 8,
  localparam int LW = (L > 1) ? $clog2(L) : 1,
  localparam int JW = $clog2(N / M)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clr,
  input  logic          upd,
  input  logic [JW-1:0] sub_idx,
  input  logic [LW-1:0] perm  [L],
  input  logic [M-1:0]  u_sub [L],
  output logic [N-1:0]  u     [L]
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < L; l++) u[l] <= '0;
    end else if (clr) begin
      for (int l = 0; l < L; l++) u[l] <= '0;
    end else if (upd) begin
      for (int l = 0; l < L; l++) begin
        logic [N-1:0] v;
        v = u[perm[l]];
        v[int'(sub_idx) * M +: M] = u_sub[l];
        u[l] <= v;
      end
    end
  end
endmodule
