// tb_ps_network -- N = 32, L = 2, M = 4.  Random sub-tree bits and random
// permutations for all N/M sub-trees of several frames.  The model keeps
// every path's full decided vector and, after sub-tree j, sets the stage
// s* = m + (index of the lowest 0 bit of j) to the polar encoding of the
// decided bits of the stage-s* node that sub-tree j completes, computed
// directly from those bits.  Whole vectors are compared after each update.
module tb_ps_network;
  localparam int N = 32, L = 2, M = 4, NS = 5, MS = 2;
  logic clk = 0, rst_n = 0, clr = 0, upd = 0;
  logic [2:0] sub_idx = 0;
  logic perm [L];
  logic [M-1:0] u_sub [L];
  logic [N-1:0] ps [L];
  int checks = 0, failures = 0;
  logic [N-1:0] mu [L], mps [L];
  always #5 clk = ~clk;
  ps_network #(.N(N), .L(L), .M(M)) dut (.clk, .rst_n, .clr, .upd, .sub_idx, .perm, .u_sub, .ps);

  function automatic logic [N-1:0] enc(logic [N-1:0] u, int n);
    logic [N-1:0] x; x = u;
    for (int h = 1; h < n; h *= 2) for (int i = 0; i < n; i++) if ((i / h) % 2 == 0) x[i] ^= x[i + h];
    return x;
  endfunction

  initial begin
    fork begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end join_none
    for (int l = 0; l < L; l++) begin perm[l] = 0; u_sub[l] = 0; end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int f = 0; f < 20; f++) begin
      @(negedge clk); clr = 1; @(negedge clk); clr = 0;
      for (int l = 0; l < L; l++) begin mu[l] = '0; mps[l] = '0; end
      for (int j = 0; j < N / M; j++) begin
        logic [N-1:0] nu [L], nps [L];
        int sst, tz;
        for (int l = 0; l < L; l++) begin perm[l] = 1'($urandom); u_sub[l] = M'($urandom); end
        sub_idx = 3'(j);
        tz = 0; while (tz < NS - MS && ((j >> tz) & 1)) tz++;
        sst = MS + tz;
        for (int l = 0; l < L; l++) begin
          nu[l] = mu[perm[l]];
          nu[l][j * M +: M] = u_sub[l];
          nps[l] = mps[perm[l]];
          if (sst < NS) begin
            logic [N-1:0] blk, x;
            int st;
            st = ((j * M) >> sst) << sst;
            blk = nu[l] >> st;
            x = enc(blk, 1 << sst);
            for (int i = 0; i < (1 << sst); i++) nps[l][(1 << sst) + i] = x[i];
          end
        end
        upd = 1; @(negedge clk); upd = 0;
        for (int l = 0; l < L; l++) begin
          mu[l] = nu[l]; mps[l] = nps[l];
          checks++;
          if (ps[l][N-1:M] != mps[l][N-1:M]) begin
            failures++;
            if (failures < 4) $display("j=%0d l=%0d got %h exp %h", j, l, ps[l], mps[l]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
