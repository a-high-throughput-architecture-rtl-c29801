// tb_control_unit -- N = 64, M = 4, P = 8 schedule.  The test answers the
// LM and CRC handshakes like the real blocks (done 1, 2 or 3 clocks after a
// tuple start depending on its class, CRC done after N/M + 1 clocks) and
// checks: N/(2P) look-ahead clocks; for each sub-tree the sequence of SC
// nodes (stage, G/F, clocks per node) against its own depth-first model;
// the tuples issued against its own top-down division; one update per
// sub-tree; busy dropping after CRC done.
module tb_control_unit;
  import lscd_pkg::*;
  localparam int N = 64, M = 4, P = 8, NS = 6, MS = 2;
  logic clk = 0, rst_n = 0, cfg_we = 0, start = 0, lm_done = 0, crc_done = 0;
  logic [5:0] cfg_addr = 0;
  bit_class_e cfg_cls = BIT_FRZ;
  logic busy, pcms, scd, node_g, lm_load, lm_init, lm_start, upd, clr, crc_start;
  logic [2:0] stage;
  logic [3:0] cyc;
  logic [3:0] sub_idx;
  logic [1:0] t_off, t_q;
  logic [2:0] t_log;
  tuple_e t_kind;
  logic [N-1:0] info;
  int checks = 0, failures = 0;
  bit_class_e cls [N];
  always #5 clk = ~clk;
  control_unit #(.N(N), .M(M), .P(P)) dut (.*);

  // expected event log
  string exp_q [$], got_q [$];

  function automatic int ncyc(int s); return ((1 << s) > P) ? (1 << s) / P : 1; endfunction
  function automatic bit tup(int o, int T, output int k, output int c);
    int nf, nr, nu; bit fu;
    nf = 0; nr = 0; nu = 0; fu = 0;
    for (int j = o; j < o + T; j++)
      if (cls[j] == BIT_FRZ) nf++; else if (cls[j] == BIT_RRL) nr++; else begin nu++; if (j == o) fu = 1; end
    if (nf == T) begin k = 0; c = 1; return 1; end
    if (nr == T) begin k = 1; c = 1; return 1; end
    if (nu == 1 && fu && nr == T - 1) begin k = 2; c = 2; return 1; end
    if (nu == 1 && nf == T - 1) begin k = 3; c = 3; return 1; end
    return 0;
  endfunction
  function automatic void div(int o, int T);
    int k, c;
    if (tup(o, T, k, c)) exp_q.push_back($sformatf("T o=%0d t=%0d k=%0d", o % M, $clog2(T), k));
    else begin div(o, T / 2); div(o + T / 2, T / 2); end
  endfunction

  // LM / CRC responders and event recorder
  int lm_cnt = 0, crc_cnt = 0;
  always @(posedge clk) begin
    lm_done  <= 1'b0;
    crc_done <= 1'b0;
    if (lm_cnt > 0) begin
      lm_cnt <= lm_cnt - 1;
      if (lm_cnt == 1) lm_done <= 1'b1;
    end
    if (lm_start) begin
      lm_cnt <= (t_kind == TUP_SP1) ? 2 : (t_kind == TUP_R1T) ? 3 : 1;
      if (t_kind == TUP_SP2_FRZ || t_kind == TUP_SP2_RRL) begin lm_done <= 1'b1; lm_cnt <= 0; end
      got_q.push_back($sformatf("T o=%0d t=%0d k=%0d", t_off, t_log, t_kind));
    end
    if (scd) got_q.push_back($sformatf("S s=%0d g=%0d c=%0d", stage, node_g, cyc));
    if (pcms) got_q.push_back($sformatf("P c=%0d", cyc));
    if (upd) got_q.push_back($sformatf("U j=%0d", sub_idx));
    if (crc_start) crc_cnt <= N / M + 1;
    else if (crc_cnt > 0) begin crc_cnt <= crc_cnt - 1; if (crc_cnt == 1) crc_done <= 1'b1; end
  end

  initial begin
    fork begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end join_none
    repeat (2) @(negedge clk); rst_n = 1;
    for (int fr = 0; fr < 5; fr++) begin
      for (int i = 0; i < N; i++) begin
        cls[i] = bit_class_e'($urandom % 3);
        @(negedge clk); cfg_we = 1; cfg_addr = 6'(i); cfg_cls = cls[i];
      end
      @(negedge clk); cfg_we = 0;
      checks++;
      for (int i = 0; i < N; i++) if (info[i] != (cls[i] != BIT_FRZ)) begin failures++; break; end
      exp_q.delete(); got_q.delete();
      for (int c = 0; c < N / (2 * P); c++) exp_q.push_back($sformatf("P c=%0d", c));
      for (int j = 0; j < N / M; j++) begin
        int top; bit g;
        g = 0;
        if (j == 0) top = NS - 2;
        else begin
          int tz; tz = 0; while (((j >> tz) & 1) == 0) tz++;
          if (MS + tz >= NS - 1) top = NS - 2; else begin top = MS + tz; g = 1; end
        end
        for (int s = top; s >= MS; s--) begin
          for (int c = 0; c < ncyc(s); c++) exp_q.push_back($sformatf("S s=%0d g=%0d c=%0d", s, (s == top) ? g : 0, c));
        end
        div(j * M, M);
        exp_q.push_back($sformatf("U j=%0d", j));
      end
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      while (busy) @(negedge clk);
      checks++;
      if (got_q.size() != exp_q.size()) begin failures++; $display("frame %0d: %0d events, expected %0d", fr, got_q.size(), exp_q.size()); end
      for (int i = 0; i < exp_q.size() && i < got_q.size(); i++) begin
        checks++;
        if (got_q[i] != exp_q[i]) begin failures++; if (failures < 5) $display("event %0d: got '%s' exp '%s'", i, got_q[i], exp_q[i]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
