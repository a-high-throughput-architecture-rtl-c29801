// tb_ppe -- exhaustive-by-sampling check of the programmable PE against
// integer arithmetic: F = min-sum, G = (-1)^ps La + Lb (saturated), in both
// the normal and the look-ahead mode, including the input-stage selects.
module tb_ppe;
  import lscd_pkg::*;
  llr_t i0, i1, i2, i3, o0, o1, o2;
  logic sel_a, sel_b, glah, is_f, ps;
  int checks = 0, failures = 0;
  ppe dut (.*);

  function automatic int val(llr_t x);
    return x.sgn ? -int'(x.mag) : int'(x.mag);
  endfunction
  function automatic int sat(int v);
    return (v > 31) ? 31 : (v < -31) ? -31 : v;
  endfunction
  task automatic chk(llr_t got, int exp_v, bit exp_sgn_known, string what);
    checks++;
    // magnitude must match; the sign must match unless the value is 0
    if (int'(got.mag) != (exp_v < 0 ? -exp_v : exp_v) || (exp_v != 0 && got.sgn != (exp_v < 0))) begin
      failures++;
      if (failures < 10) $display("%s: got %0d%s exp %0d", what, got.mag, got.sgn ? "-" : "+", exp_v);
    end
  endtask

  initial begin
    fork begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end join_none
    for (int n = 0; n < 4000; n++) begin
      int a, b, f, g0, g1;
      {i0, i1, i2, i3} = {$urandom, $urandom};
      sel_a = $urandom; sel_b = $urandom; glah = $urandom; is_f = $urandom; ps = $urandom;
      #1;
      a  = val(sel_a ? i1 : i0);
      b  = val(sel_b ? i3 : i2);
      f  = (((a < 0) != (b < 0)) ? -1 : 1) * ((a < 0 ? -a : a) < (b < 0 ? -b : b) ? (a < 0 ? -a : a) : (b < 0 ? -b : b));
      // F's sign is the XOR of the sign bits, also when a magnitude is 0
      checks++;
      if (o0.sgn != ((sel_a ? i1.sgn : i0.sgn) ^ (sel_b ? i3.sgn : i2.sgn))) failures++;
      g0 = sat(a + b);
      g1 = sat(b - a);
      chk(o0, f, 1, "F");
      chk(o2, g1, 1, "G1");
      if (glah) chk(o1, g0, 1, "G0");
      else if (is_f) chk(o1, f, 1, "F/o1");
      else chk(o1, ps ? g1 : g0, 1, "G(ps)");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
