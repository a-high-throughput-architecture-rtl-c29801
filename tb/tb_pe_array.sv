// tb_pe_array -- random check of every lane of a P = 8 PE array in normal
// (F and G with per-lane partial sums) and look-ahead mode.
module tb_pe_array;
  import lscd_pkg::*;
  localparam int P = 8;
  llr_t [P-1:0] a0, a1, b0, b1, o0, o1, o2;
  logic [P-1:0] sel_a, sel_b, ps;
  logic glah, is_f;
  int checks = 0, failures = 0;
  pe_array #(.P(P)) dut (.*);

  function automatic int val(llr_t x); return x.sgn ? -int'(x.mag) : int'(x.mag); endfunction
  function automatic int sat(int v); return (v > 31) ? 31 : (v < -31) ? -31 : v; endfunction
  function automatic int absv(int v); return v < 0 ? -v : v; endfunction

  initial begin
    fork begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end join_none
    for (int n = 0; n < 1000; n++) begin
      for (int i = 0; i < P; i++) begin
        a0[i] = llr_t'($urandom); a1[i] = llr_t'($urandom);
        b0[i] = llr_t'($urandom); b1[i] = llr_t'($urandom);
      end
      sel_a = P'($urandom); sel_b = P'($urandom); ps = P'($urandom);
      glah = $urandom; is_f = $urandom;
      #1;
      for (int i = 0; i < P; i++) begin
        int a, b, e;
        a = val(sel_a[i] ? a1[i] : a0[i]);
        b = val(sel_b[i] ? b1[i] : b0[i]);
        if (glah) e = sat(a + b);
        else if (is_f) e = (absv(a) < absv(b) ? absv(a) : absv(b)) * ((((sel_a[i] ? a1[i].sgn : a0[i].sgn) ^ (sel_b[i] ? b1[i].sgn : b0[i].sgn))) ? -1 : 1);
        else e = sat((ps[i] ? -a : a) + b);
        checks++;
        if (int'(o1[i].mag) != absv(e) || (e != 0 && o1[i].sgn != (e < 0))) failures++;
        checks++;
        if (int'(o2[i].mag) != absv(sat(b - a))) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
