// tb_tuple_div -- random bit classes of an M = 8 sub-tree; the tuples found
// by stepping tuple_div through the sub-tree must equal those of the test's
// own top-down recursion (Algorithm 1), with the same class and position q.
module tb_tuple_div;
  import lscd_pkg::*;
  localparam int M = 8;
  bit_class_e cls [M];
  logic [2:0] off, q;
  logic [3:0] t;
  tuple_e kind;
  int checks = 0, failures = 0;
  int ex_o [M], ex_t [M], ex_k [M], ex_q [M], nex;
  tuple_div #(.M(M)) dut (.*);

  function automatic bit classify(int o, int T, output int k, output int qq);
    int nf, nr, nu; bit fu;
    nf = 0; nr = 0; nu = 0; fu = 0; qq = 0;
    for (int j = o; j < o + T; j++)
      if (cls[j] == BIT_FRZ) nf++;
      else if (cls[j] == BIT_RRL) nr++;
      else begin nu++; qq = j - o; if (j == o) fu = 1; end
    if (nf == T) begin k = TUP_SP2_FRZ; qq = 0; return 1; end
    if (nr == T) begin k = TUP_SP2_RRL; qq = 0; return 1; end
    if (nu == 1 && fu && nr == T - 1) begin k = TUP_SP1; qq = 0; return 1; end
    if (nu == 1 && nf == T - 1) begin k = TUP_R1T; return 1; end
    return 0;
  endfunction

  function automatic void div(int o, int T);
    int k, qq;
    if (classify(o, T, k, qq)) begin
      ex_o[nex] = o; ex_t[nex] = $clog2(T); ex_k[nex] = k; ex_q[nex] = qq; nex++;
    end else begin
      div(o, T / 2); div(o + T / 2, T / 2);
    end
  endfunction

  initial begin
    fork begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end join_none
    for (int n = 0; n < 3000; n++) begin
      int o, i;
      for (int j = 0; j < M; j++) cls[j] = bit_class_e'($urandom % 3);
      nex = 0;
      div(0, M);
      o = 0; i = 0;
      while (o < M) begin
        off = 3'(o); #1;
        checks++;
        if (i >= nex || ex_o[i] != o || ex_t[i] != int'(t) || ex_k[i] != int'(kind) || ex_q[i] != int'(q)) begin
          failures++;
          break;
        end
        o += 1 << t; i++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
