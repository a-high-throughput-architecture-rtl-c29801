// tb_pmu -- M = 8 PMU of one path.  For random stage-m LLRs, random bits
// already decided in the sub-tree, every aligned tuple position and every
// tuple class, the test computes the stage-t LLRs by its own recursive SC
// evaluation, builds the candidate vectors from the class rules and checks
// both metrics and both decided bit vectors.
module tb_pmu;
  import lscd_pkg::*;
  localparam int M = 8;
  llr_t [M-1:0] llr_m;
  logic [M-1:0] u_sub, u_a, u_b;
  logic [2:0] off, q;
  logic [3:0] t;
  tuple_e kind;
  pm_t gamma, theta, pm_max, pm_a;
  logic b_first;
  int checks = 0, failures = 0;
  pmu #(.M(M)) dut (.*);

  function automatic int val(llr_t x); return x.sgn ? -int'(x.mag) : int'(x.mag); endfunction
  function automatic int absv(int v); return v < 0 ? -v : v; endfunction

  // x = u F^k on n = 2^k bits
  function automatic logic [M-1:0] enc(logic [M-1:0] u, int n);
    logic [M-1:0] x; x = u;
    for (int h = 1; h < n; h *= 2)
      for (int i = 0; i < n; i++) if ((i / h) % 2 == 0) x[i] ^= x[i + h];
    return x;
  endfunction

  // signed LLRs of the node (stage s, index qn) below the sub-tree root
  function automatic void node_llr(int s, int qn, output int v [M]);
    int par [M];
    int n;
    if (s == 3) begin
      for (int i = 0; i < M; i++) v[i] = val(llr_m[i]);
      return;
    end
    node_llr(s + 1, qn / 2, par);
    n = 1 << s;
    for (int i = 0; i < M; i++) v[i] = 0;
    for (int i = 0; i < n; i++) begin
      int a, b;
      a = par[i]; b = par[i + n];
      if (qn % 2 == 0) begin
        // min-sum F; sign from the operands' signs
        v[i] = (absv(a) < absv(b) ? absv(a) : absv(b));
        if ((a < 0) != (b < 0)) v[i] = -v[i];
      end else begin
        logic [M-1:0] x;
        x = enc(u_sub >> ((qn - 1) * n), n);
        v[i] = (x[i] ? -a : a) + b;
        if (v[i] > 31) v[i] = 31;
        if (v[i] < -31) v[i] = -31;
      end
    end
  endfunction

  initial begin
    fork begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end join_none
    for (int n = 0; n < 400; n++) begin
      for (int tt = 0; tt <= 3; tt++) begin
        for (int o = 0; o < M; o += (1 << tt)) begin
          int v [M];
          int T, da, db, k, pa, pb;
          logic [M-1:0] al, be, hd;
          logic par;
          for (int i = 0; i < M; i++) llr_m[i] = llr_t'($urandom);
          u_sub = M'($urandom);
          gamma = pm_t'($urandom % 200);
          off = 3'(o); t = 4'(tt); q = 3'($urandom % (1 << tt));
          kind = tuple_e'($urandom % 4);
          #1;
          T = 1 << tt;
          node_llr(tt, o >> tt, v);
          hd = '0; par = 0; k = 0;
          for (int j = 0; j < T; j++) begin
            hd[j] = (v[j] < 0) || (v[j] == 0 && 0);
            // the hardware takes the sign bit; for value 0 it may be either
          end
          // use the sign bits the hardware sees for zero values
          for (int j = 0; j < T; j++) if (v[j] == 0) hd[j] = dut.tl[j].sgn;
          for (int j = 0; j < T; j++) begin
            par ^= hd[j];
            if (absv(v[j]) < absv(v[k])) k = j;
          end
          case (kind)
            TUP_SP2_FRZ: begin al = 0; be = 0; end
            TUP_SP2_RRL: begin al = hd; be = hd; end
            TUP_SP1: begin al = hd; be = hd; if (par) al[k] = ~al[k]; else be[k] = ~be[k]; end
            default: begin al = 0; be = enc(M'(1) << q, T); end
          endcase
          da = 0; db = 0;
          for (int j = 0; j < T; j++) begin
            if (al[j] != hd[j]) da += absv(v[j]);
            if (be[j] != hd[j]) db += absv(v[j]);
          end
          pa = gamma + da; if (pa > 255) pa = 255;
          pb = gamma + db; if (pb > 255) pb = 255;
          checks += 4;
          if (int'(theta) != (da > db ? pb : pa)) begin failures++; if (failures < 5) $display("theta t=%0d o=%0d kind=%0d got %0d exp %0d", tt, o, kind, theta, (da > db ? pb : pa)); end
          if (int'(pm_max) != (da > db ? pa : pb)) failures++;
          if (int'(pm_a) != pa) failures++;
          begin
            logic [M-1:0] msk, ea, eb;
            msk = M'((1 << T) - 1); ea = enc(al, T); eb = enc(be, T);
            if (((u_a ^ ea) & msk) != 0 || ((u_b ^ eb) & msk) != 0) failures++;
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
