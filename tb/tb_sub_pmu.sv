// tb_sub_pmu -- random LLRs, candidate vectors and metrics for T = 4;
// penalties and ordered metrics against direct summation.
module tb_sub_pmu;
  import lscd_pkg::*;
  localparam int T = 4;
  llr_t [T-1:0] llr;
  logic [T-1:0] alpha, beta;
  pm_t gamma, theta, pm_max, delta_a, delta_b;
  logic b_first;
  int checks = 0, failures = 0;
  sub_pmu #(.T(T)) dut (.*);
  initial begin
    fork begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end join_none
    for (int n = 0; n < 2000; n++) begin
      int da, db, pa, pb;
      llr = 24'($urandom); alpha = T'($urandom); beta = T'($urandom); gamma = pm_t'($urandom);
      #1;
      da = 0; db = 0;
      for (int j = 0; j < T; j++) begin
        if (alpha[j] != llr[j].sgn) da += llr[j].mag;
        if (beta[j]  != llr[j].sgn) db += llr[j].mag;
      end
      pa = gamma + da; if (pa > 255) pa = 255;
      pb = gamma + db; if (pb > 255) pb = 255;
      checks += 4;
      if (int'(delta_a) != da || int'(delta_b) != db) failures++;
      if (int'(theta)  != (da > db ? pb : pa)) failures++;
      if (int'(pm_max) != (da > db ? pa : pb)) failures++;
      if (b_first != (da > db)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
