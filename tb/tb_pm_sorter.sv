// tb_pm_sorter -- random metrics with random validity (duplicates likely) for
// L = 8; AT and RT keys must equal entries L/2 and 6 (the default RT rank for L = 8) of the keys sorted
// by the test itself (insertion sort).
module tb_pm_sorter;
  import lscd_pkg::*;
  localparam int L = 8;
  pm_t pm [L];
  logic [L-1:0] valid;
  logic [QPM:0] at_key, rt_key;
  int checks = 0, failures = 0;
  pm_sorter #(.L(L)) dut (.*);
  initial begin
    fork begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end join_none
    for (int n = 0; n < 2000; n++) begin
      int k [L];
      for (int l = 0; l < L; l++) pm[l] = pm_t'($urandom % 16);
      valid = (n % 4 == 0) ? L'($urandom) : '1;
      #1;
      for (int l = 0; l < L; l++) k[l] = (valid[l] ? 0 : 256) + pm[l];
      for (int a = 1; a < L; a++) begin
        int v, b; v = k[a]; b = a - 1;
        while (b >= 0 && k[b] > v) begin k[b + 1] = k[b]; b--; end
        k[b + 1] = v;
      end
      checks += 2;
      if (int'(at_key) != k[L / 2]) failures++;
      if (int'(rt_key) != k[6]) failures++;   // default RT rank for L = 8
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
