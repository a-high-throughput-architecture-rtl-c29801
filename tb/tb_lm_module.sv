// tb_lm_module -- LM module with L = 4, M = 4.  Tuples span the whole
// sub-tree (t = m), so the expected metrics follow directly from the
// stage-m LLRs.  The test keeps its own list model (metrics, validity,
// decided bits), computes per path the two candidate metrics from the class
// rules, the thresholds from its own sort and the DTS selection in index
// order, and compares after every tuple.  It also checks the cycle count of
// each class: SP2 1, SP1 2, rate-1/T 3 clocks from start to done.
module tb_lm_module;
  import lscd_pkg::*;
  localparam int L = 4, M = 4;
  logic clk = 0, rst_n = 0, init = 0, load = 0, start = 0;
  llr_t [M-1:0] llr_in [L];
  logic [1:0] off = 0, q = 0;
  logic [2:0] t = 3'd2;
  tuple_e kind = TUP_SP2_FRZ;
  logic busy, done, dts_used;
  pm_t gamma [L];
  logic [L-1:0] valid;
  logic [M-1:0] u_sub [L];
  logic [1:0] perm [L];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  lm_module #(.L(L), .M(M)) dut (.*);

  // model state
  int   mg [L];
  bit   mv [L];
  logic [M-1:0] mu [L];
  llr_t [M-1:0] ml [L];

  function automatic logic [M-1:0] enc(logic [M-1:0] u);
    logic [M-1:0] x; x = u;
    for (int h = 1; h < M; h *= 2) for (int i = 0; i < M; i++) if ((i / h) % 2 == 0) x[i] ^= x[i + h];
    return x;
  endfunction
  function automatic int sat(int v); return v > 255 ? 255 : v; endfunction

  task automatic run_tuple(tuple_e k, int qq);
    int pa [L], pb [L], th [L], mx [L], bfirst [L], srt [L], at, rt, nsel, cyc, expc;
    logic [M-1:0] va [L], vb [L];
    int np [L], nb [L], nm [L];
    for (int l = 0; l < L; l++) begin
      logic [M-1:0] hd; logic par; int kk, da, db;
      hd = '0; par = 0; kk = 0;
      for (int j = 0; j < M; j++) begin hd[j] = ml[l][j].sgn; par ^= hd[j]; if (ml[l][j].mag < ml[l][kk].mag) kk = j; end
      case (k)
        TUP_SP2_FRZ: begin va[l] = 0; vb[l] = 0; end
        TUP_SP2_RRL: begin va[l] = hd; vb[l] = hd; end
        TUP_SP1: begin va[l] = hd; vb[l] = hd; if (par) va[l][kk] = ~va[l][kk]; else vb[l][kk] = ~vb[l][kk]; end
        default: begin va[l] = 0; vb[l] = enc(M'(1) << qq); end
      endcase
      da = 0; db = 0;
      for (int j = 0; j < M; j++) begin
        if (va[l][j] != hd[j]) da += ml[l][j].mag;
        if (vb[l][j] != hd[j]) db += ml[l][j].mag;
      end
      pa[l] = sat(mg[l] + da); pb[l] = sat(mg[l] + db);
      bfirst[l] = da > db;
      th[l] = bfirst[l] ? pb[l] : pa[l];
      mx[l] = bfirst[l] ? pa[l] : pb[l];
    end
    @(negedge clk);
    kind = k; q = 2'(qq); start = 1;
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    expc = (k == TUP_SP1) ? 2 : (k == TUP_R1T) ? 3 : 1;
    checks++;
    if (cyc != expc) begin failures++; $display("class %0d: %0d clocks, expected %0d", k, cyc, expc); end
    if (k == TUP_SP2_FRZ || k == TUP_SP2_RRL) begin
      for (int l = 0; l < L; l++) begin mg[l] = pa[l]; mu[l] = enc(va[l]); end
    end else begin
      // thresholds: from current metrics (SP1) or from theta (rate-1/T)
      for (int l = 0; l < L; l++) srt[l] = (mv[l] ? 0 : 256) + ((k == TUP_SP1) ? mg[l] : th[l]);
      for (int a = 1; a < L; a++) begin
        int v, b; v = srt[a]; b = a - 1;
        while (b >= 0 && srt[b] > v) begin srt[b + 1] = srt[b]; b--; end
        srt[b + 1] = v;
      end
      at = srt[L / 2]; rt = srt[L - 1];
      nsel = 0;
      for (int pass = 0; pass < 2; pass++)
        for (int e = 0; e < 2 * L; e++) begin
          int key; bit ok;
          if (!mv[e / 2]) continue;
          key = (e % 2 == 0) ? th[e / 2] : mx[e / 2];
          ok = (pass == 0) ? (key < at) : (key >= at && key <= rt);
          if (ok && nsel < L) begin np[nsel] = e / 2; nb[nsel] = e % 2; nm[nsel] = key; nsel++; end
        end
      begin
        logic [M-1:0] nu [L]; llr_t [M-1:0] nl [L];
        for (int l = 0; l < L; l++) begin
          if (l < nsel) begin
            nu[l] = ((nb[l] != 0) != (bfirst[np[l]] != 0)) ? enc(vb[np[l]]) : enc(va[np[l]]);
            nl[l] = ml[np[l]];
          end
        end
        for (int l = 0; l < L; l++) begin
          mv[l] = (l < nsel);
          if (l < nsel) begin mg[l] = nm[l]; mu[l] = nu[l]; ml[l] = nl[l]; end
        end
      end
    end
    for (int l = 0; l < L; l++) begin
      checks++;
      if (valid[l] != mv[l]) failures++;
      else if (mv[l] && (int'(gamma[l]) != mg[l] || u_sub[l] != mu[l])) begin
        failures++;
        if (failures < 6) $display("class %0d slot %0d: pm %0d/%0d bits %b/%b", k, l, gamma[l], mg[l], u_sub[l], mu[l]);
      end
    end
  endtask

  task automatic load_llrs();
    @(negedge clk);
    for (int l = 0; l < L; l++) begin
      for (int j = 0; j < M; j++) llr_in[l][j] = llr_t'($urandom);
      ml[l] = llr_in[l]; mu[l] = '0;
    end
    load = 1;
    @(negedge clk); load = 0;
  endtask

  initial begin
    fork begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end join_none
    for (int l = 0; l < L; l++) llr_in[l] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk); init = 1; @(negedge clk); init = 0;
    for (int l = 0; l < L; l++) begin mg[l] = 0; mv[l] = (l == 0); end
    for (int r = 0; r < 60; r++) begin
      load_llrs();
      run_tuple(tuple_e'($urandom % 4), $urandom % M);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
