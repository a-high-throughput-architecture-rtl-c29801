// tb_path_mem -- N = 64, L = 4, M = 8: random permutations and sub-tree
// bits for every sub-tree of several frames against a copy-and-write model.
module tb_path_mem;
  localparam int N = 64, L = 4, M = 8;
  logic clk = 0, rst_n = 0, clr = 0, upd = 0;
  logic [2:0] sub_idx = 0;
  logic [1:0] perm [L];
  logic [M-1:0] u_sub [L];
  logic [N-1:0] u [L], mu [L];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  path_mem #(.N(N), .L(L), .M(M)) dut (.*);
  initial begin
    fork begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end join_none
    for (int l = 0; l < L; l++) begin perm[l] = 0; u_sub[l] = 0; end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int f = 0; f < 20; f++) begin
      @(negedge clk); clr = 1; @(negedge clk); clr = 0;
      for (int l = 0; l < L; l++) mu[l] = '0;
      for (int j = 0; j < N / M; j++) begin
        logic [N-1:0] nu [L];
        for (int l = 0; l < L; l++) begin perm[l] = 2'($urandom); u_sub[l] = M'($urandom); end
        sub_idx = 3'(j);
        for (int l = 0; l < L; l++) begin nu[l] = mu[perm[l]]; nu[l][j * M +: M] = u_sub[l]; end
        upd = 1; @(negedge clk); upd = 0;
        for (int l = 0; l < L; l++) begin mu[l] = nu[l]; checks++; if (u[l] != mu[l]) failures++; end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
