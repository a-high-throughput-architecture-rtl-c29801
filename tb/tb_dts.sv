// tb_dts -- list pruning for L = 8 with thresholds taken from the sorted
// theta values (as in the decoder).  The test's own model walks the 2L
// expanded paths in order, first taking those below AT, then those between
// AT and RT, and compares slot by slot (validity, parent, branch, metric).
// It also checks that the list is filled whenever enough candidates exist.
module tb_dts;
  import lscd_pkg::*;
  localparam int L = 8;
  logic [L-1:0] valid, nvalid, branch;
  pm_t pm0 [L], pm1 [L], npm [L];
  logic [QPM:0] at_key, rt_key;
  logic [2:0] parent [L];
  int unsigned n_kept;
  int checks = 0, failures = 0;
  dts #(.L(L)) dut (.*);
  initial begin
    fork begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end join_none
    for (int n = 0; n < 2000; n++) begin
      int th [L], srt [L], nsel, ep [2 * L], eb [2 * L], em [2 * L];
      valid = (n % 3 == 0) ? L'($urandom) : '1;
      for (int l = 0; l < L; l++) begin
        int a, b;
        a = $urandom % 40; b = a + $urandom % 40;
        pm0[l] = pm_t'(a); pm1[l] = pm_t'(b);
        th[l] = (valid[l] ? 0 : 256) + a;
        srt[l] = th[l];
      end
      for (int a = 1; a < L; a++) begin
        int v, b; v = srt[a]; b = a - 1;
        while (b >= 0 && srt[b] > v) begin srt[b + 1] = srt[b]; b--; end
        srt[b + 1] = v;
      end
      at_key = (QPM+1)'(srt[L / 2]);
      rt_key = (QPM+1)'(srt[L - 1]);
      #1;
      nsel = 0;
      for (int pass = 0; pass < 2; pass++)
        for (int k = 0; k < 2 * L; k++) begin
          int key; bit ok;
          key = (k % 2 == 0) ? pm0[k / 2] : pm1[k / 2];
          if (!valid[k / 2]) continue;
          ok = (pass == 0) ? (key < int'(at_key)) : (key >= int'(at_key) && key <= int'(rt_key));
          if (ok && nsel < L) begin ep[nsel] = k / 2; eb[nsel] = k % 2; em[nsel] = key; nsel++; end
        end
      for (int l = 0; l < L; l++) begin
        checks++;
        if (nvalid[l] != (l < nsel)) failures++;
        else if (l < nsel && (int'(parent[l]) != ep[l] || branch[l] != eb[l][0] || int'(npm[l]) != em[l])) failures++;
      end
      checks++;
      if (nsel < L && nsel < 2 * $countones(valid)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
