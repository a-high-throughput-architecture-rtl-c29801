// lscd_tb_core -- end-to-end test bench body for lscd_top, shared by the
// reduced-size test (tb_lscd_top) and the full-size test (tb_lscd_full).
//
// Code construction: bit reliabilities by the polarisation-weight rule
// w(i) = sum_k b_k * 2^(k/4) (b_k = bit k of i); the K most reliable bits carry
// information, and the most reliable RFRAC of those are the reliable
// (hard-decision) set.  Each frame: random message, CRC-24 (0x1864CFB,
// zero init, MSB first) appended, polar encoding x = u F^n, BPSK with
// deterministic pseudo-random noise, quantisation to sign-magnitude LLRs.
// Checks per frame: decoded word == transmitted u, crc_ok, and the number of
// clocks from start to done against a cycle model of the schedule computed
// here from the code set (its own top-down tuple division).
// Per-path LLR check: whenever a sub-tree's stage-m LLRs enter the list
// manager, they are recomputed for every valid path from the quantised
// channel LLRs and that path's decoded bits with an integer min-sum model,
// and must match exactly (one check per frame).
// Mechanism counters: SP1, SP2 (frozen and reliable), rate-1/T tuples, G
// nodes, top-stage look-ahead candidate selection, DTS with a full list,
// DTS that dropped a path, lazy-copy permutations.  Each must occur.
module lscd_tb_core #(
  parameter bit  FULL   = 1'b0,
  parameter int  N      = 64,
  parameter int  L      = 4,
  parameter int  M      = 4,
  parameter int  P      = 8,
  parameter int  FRAMES = 4,
  parameter int  WDOG   = 200000
);
  import lscd_pkg::*;
  localparam int NS  = $clog2(N);
  localparam int MS  = $clog2(M);
  localparam int K   = N / 2;
  localparam int R   = 24;
  localparam logic [R-1:0] POLY = 24'h864CFB;
  localparam int CHW = $clog2(N / P);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic           cfg_we = 1'b0;
  logic [NS-1:0]  cfg_addr = '0;
  bit_class_e     cfg_cls = BIT_FRZ;
  logic           ch_we = 1'b0;
  logic [CHW-1:0] ch_addr = '0;
  llr_t [P-1:0]   ch_data = '0;
  logic           start = 1'b0;
  logic           busy, done, crc_ok;
  logic [N-1:0]   dout;

  // taps into the decoder for the per-path LLR reference check
  localparam int JW = NS - MS;
  logic          tap_load;
  logic [JW-1:0] tap_j;
  llr_t [M-1:0]  tap_llr [L];
  logic [N-1:0]  tap_u   [L];
  logic [L-1:0]  tap_valid;

  if (FULL) begin : g_full
    lscd_top dut (.*);
    assign tap_load  = dut.lm_load;
    assign tap_j     = dut.sub_idx;
    assign tap_llr   = dut.lm_in;
    assign tap_u     = dut.u;
    assign tap_valid = dut.u_lm.valid;
  end else begin : g_red
    lscd_top #(.N(N), .L(L), .M(M), .P(P)) dut (.*);
    assign tap_load  = dut.lm_load;
    assign tap_j     = dut.sub_idx;
    assign tap_llr   = dut.lm_in;
    assign tap_u     = dut.u;
    assign tap_valid = dut.u_lm.valid;
  end

  int checks = 0, failures = 0;
  int cyc_cnt = 0;
  always @(posedge clk) cyc_cnt <= cyc_cnt + 1;

  // watchdog
  initial begin
    repeat (WDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- mechanism counters ----------------
  int n_sp1 = 0, n_sp2f = 0, n_sp2r = 0, n_r1t = 0, n_g = 0, n_top_g = 0;
  int n_dts_full = 0, n_dts_drop = 0, n_perm = 0;
  if (FULL) begin : g_mon_full
    always @(posedge clk) if (rst_n) begin
      if (g_full.dut.u_ctl.lm_start) begin
        case (g_full.dut.u_ctl.t_kind)
          TUP_SP1:     n_sp1++;
          TUP_SP2_FRZ: n_sp2f++;
          TUP_SP2_RRL: n_sp2r++;
          default:     n_r1t++;
        endcase
      end
      if (g_full.dut.scd && g_full.dut.node_g) n_g++;
      if (g_full.dut.scd && int'(g_full.dut.stage) == NS - 2 && int'(g_full.dut.sub_idx) >= N / (2 * M)) n_top_g++;
      if (g_full.dut.u_lm.dts_used && &g_full.dut.valid) n_dts_full++;
      if (g_full.dut.u_lm.dts_used && g_full.dut.u_lm.d_kept < L) n_dts_drop++;
      if (g_full.dut.upd) for (int l = 0; l < L; l++) if (int'(g_full.dut.perm[l]) != l) begin n_perm++; break; end
    end
  end else begin : g_mon_red
    always @(posedge clk) if (rst_n) begin
      if (g_red.dut.u_ctl.lm_start) begin
        case (g_red.dut.u_ctl.t_kind)
          TUP_SP1:     n_sp1++;
          TUP_SP2_FRZ: n_sp2f++;
          TUP_SP2_RRL: n_sp2r++;
          default:     n_r1t++;
        endcase
      end
      if (g_red.dut.scd && g_red.dut.node_g) n_g++;
      if (g_red.dut.scd && int'(g_red.dut.stage) == NS - 2 && int'(g_red.dut.sub_idx) >= N / (2 * M)) n_top_g++;
      if (g_red.dut.u_lm.dts_used && &g_red.dut.valid) n_dts_full++;
      if (g_red.dut.u_lm.dts_used && g_red.dut.u_lm.d_kept < L) n_dts_drop++;
      if (g_red.dut.upd) for (int l = 0; l < L; l++) if (int'(g_red.dut.perm[l]) != l) begin n_perm++; break; end
    end
  end

  // ---------------- code construction ----------------
  bit_class_e cls [N];
  real        w [N];

  function automatic void build_code(int rfrac_pct);
    int order [N];
    int ninfo_r;
    for (int i = 0; i < N; i++) begin
      w[i] = 0.0;
      for (int k = 0; k < NS; k++) if ((i >> k) & 1) w[i] += $pow(2.0, k / 4.0);
      order[i] = i;
    end
    // sort indices by decreasing reliability (simple selection sort)
    for (int a = 0; a < N; a++)
      for (int b = a + 1; b < N; b++)
        if (w[order[b]] > w[order[a]]) begin
          int tmp; tmp = order[a]; order[a] = order[b]; order[b] = tmp;
        end
    ninfo_r = K * rfrac_pct / 100;
    for (int i = 0; i < N; i++) cls[i] = BIT_FRZ;
    for (int a = 0; a < K; a++) cls[order[a]] = (a < ninfo_r) ? BIT_RRL : BIT_URL;
  endfunction

  // ---------------- cycle model ----------------
  function automatic bit is_tuple(int o, int T, output int c);
    int nf, nr, nu; bit fu;
    nf = 0; nr = 0; nu = 0; fu = 0;
    for (int j = o; j < o + T; j++) begin
      if (cls[j] == BIT_FRZ) nf++;
      else if (cls[j] == BIT_RRL) nr++;
      else begin nu++; if (j == o) fu = 1; end
    end
    if (nf == T || nr == T) begin c = 1; return 1; end
    if (nu == 1 && fu && nr == T - 1) begin c = 2; return 1; end
    if (nu == 1 && nf == T - 1) begin c = 3; return 1; end
    c = 0;
    return 0;
  endfunction

  function automatic int tuple_cycles(int o, int T);
    int c;
    if (is_tuple(o, T, c)) return c;
    return tuple_cycles(o, T / 2) + tuple_cycles(o + T / 2, T / 2);
  endfunction

  function automatic int ncyc(int s);
    return ((1 << s) > P) ? (1 << s) / P : 1;
  endfunction

  function automatic int expected_cycles();
    int tot, top;
    tot = N / (2 * P);
    for (int j = 0; j < N / M; j++) begin
      if (j == 0) top = NS - 2;
      else begin
        int tz; tz = 0;
        while (((j >> tz) & 1) == 0) tz++;
        top = (MS + tz >= NS - 1) ? NS - 2 : MS + tz;
      end
      for (int s = top; s >= MS; s--) tot += ncyc(s);
      tot += tuple_cycles(j * M, M) + 1 + 1;   // tuples + first issue + update
    end
    return tot + 2 + N / M;                    // CRC start, scan, done
  endfunction

  // ---------------- frame generation ----------------
  logic [N-1:0] u_tx;
  int           llr_i [N];
  int unsigned  seed = 32'h1234_5678;

  function automatic int rnd();
    seed = seed * 1103515245 + 12345;
    return int'((seed >> 8) & 16'hFFFF);
  endfunction

  task automatic make_frame(int amp, int noise);
    logic [N-1:0] x;
    logic [R-1:0] c;
    logic [K-1:0] info;
    int a;
    for (int b = 0; b < K - R; b++) info[b] = rnd() & 1;
    c = '0;
    for (int b = 0; b < K - R; b++) begin
      logic fb; fb = c[R-1] ^ info[b];
      c = {c[R-2:0], 1'b0} ^ (fb ? POLY : '0);
    end
    for (int b = 0; b < R; b++) info[K - R + b] = c[R - 1 - b];
    a = 0;
    u_tx = '0;
    for (int i = 0; i < N; i++) if (cls[i] != BIT_FRZ) begin u_tx[i] = info[a]; a++; end
    x = u_tx;
    for (int s = 0; s < NS; s++)
      for (int i = 0; i < N; i++)
        if (((i >> s) & 1) == 0) x[i] = x[i] ^ x[i + (1 << s)];
    for (int i = 0; i < N; i++) begin
      int nz;
      nz = ((rnd() % (2 * noise + 1)) - noise) + ((rnd() % (2 * noise + 1)) - noise);
      llr_i[i] = (x[i] ? -amp : amp) + nz;
    end
  endtask

  function automatic llr_t q_llr(int v);
    llr_t r;
    r.sgn = (v < 0);
    r.mag = ((v < 0 ? -v : v) > 31) ? 5'd31 : mag_t'(v < 0 ? -v : v);
    return r;
  endfunction

  // Per-path LLR reference: when a sub-tree's stage-m LLRs reach the list
  // manager, recompute them for every valid path from the quantised channel
  // LLRs and that path's decoded bits (min-sum F, G with saturation at 31,
  // integers) and compare.  This checks the look-ahead top stage, the
  // lazy-copy pointers and crossbar, and the partial sums bit-exactly.
  int ch_q [N];
  int llr_mism = 0, llr_cmp = 0;

  function automatic int f_op(int a, int b);
    int ma, mb;
    ma = a < 0 ? -a : a;  mb = b < 0 ? -b : b;
    return ((a < 0) != (b < 0)) ? -(ma < mb ? ma : mb) : (ma < mb ? ma : mb);
  endfunction

  function automatic int g_op(int a, int b, bit ps);
    int v;
    v = (ps ? -a : a) + b;
    return v > 31 ? 31 : (v < -31 ? -31 : v);
  endfunction

  function automatic void ref_llr(int jj, logic [N-1:0] uu, output int r [M]);
    int cur [N];
    int nxt [N];
    int base, sz;
    logic [N-1:0] x;
    for (int i = 0; i < N; i++) cur[i] = ch_q[i];
    base = 0;
    for (int s = NS; s > MS; s--) begin
      sz = 1 << (s - 1);
      if (((jj * M) >> (s - 1)) % 2 == 0) begin
        for (int i = 0; i < sz; i++) nxt[i] = f_op(cur[i], cur[i + sz]);
      end else begin
        x = '0;
        for (int i = 0; i < sz; i++) x[i] = uu[base + i];
        for (int t = 0; t < s - 1; t++)
          for (int i = 0; i < sz; i++)
            if (((i >> t) & 1) == 0) x[i] = x[i] ^ x[i + (1 << t)];
        for (int i = 0; i < sz; i++) nxt[i] = g_op(cur[i], cur[i + sz], x[i]);
        base += sz;
      end
      for (int i = 0; i < sz; i++) cur[i] = nxt[i];
    end
    for (int i = 0; i < M; i++) r[i] = cur[i];
  endfunction

  always @(posedge clk) begin
    if (tap_load) begin
      for (int l = 0; l < L; l++) begin
        if (tap_valid[l]) begin
          int r [M];
          ref_llr(int'(tap_j), tap_u[l], r);
          for (int i = 0; i < M; i++) begin
            int v;
            v = tap_llr[l][i].sgn ? -int'(tap_llr[l][i].mag) : int'(tap_llr[l][i].mag);
            llr_cmp++;
            if (v != r[i]) llr_mism++;
          end
        end
      end
    end
  end

  initial begin
    int exp_cyc, t0, n_ok, mism0;
    mism0 = 0;
    build_code(50);
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    for (int i = 0; i < N; i++) begin
      cfg_we <= 1'b1; cfg_addr <= NS'(i); cfg_cls <= cls[i];
      @(posedge clk);
    end
    cfg_we <= 1'b0;
    exp_cyc = expected_cycles();
    n_ok = 0;
    for (int f = 0; f < FRAMES; f++) begin
      // noise grows over the frames; frame 0 is noiseless
      make_frame(8, (f == 0) ? 0 : 2 + f);
      for (int wd = 0; wd < N / P; wd++) begin
        ch_we <= 1'b1; ch_addr <= CHW'(wd);
        for (int i = 0; i < P; i++) ch_data[i] <= q_llr(llr_i[wd * P + i]);
        for (int i = 0; i < P; i++) ch_q[wd * P + i] = llr_i[wd * P + i] > 31 ? 31 : (llr_i[wd * P + i] < -31 ? -31 : llr_i[wd * P + i]);
        @(posedge clk);
      end
      ch_we <= 1'b0;
      start <= 1'b1;
      @(posedge clk);
      t0 = cyc_cnt;
      start <= 1'b0;
      do @(posedge clk); while (!done);
      checks++;
      if (llr_mism != mism0) begin
        failures++;
        $display("frame %0d: %0d stage-m LLRs differ from the per-path reference", f, llr_mism - mism0);
      end
      mism0 = llr_mism;
      checks++;
      if (dout !== u_tx) begin
        failures++;
        $display("frame %0d: decoded word differs from the transmitted word", f);
      end else n_ok++;
      checks++;
      if (!crc_ok) begin
        failures++;
        $display("frame %0d: crc_ok low", f);
      end
      checks++;
      if (cyc_cnt - t0 != exp_cyc) begin
        failures++;
        $display("frame %0d: %0d clocks, model says %0d", f, cyc_cnt - t0, exp_cyc);
      end
      $display("frame %0d: %0d clocks per frame", f, cyc_cnt - t0);
      @(posedge clk);
    end
    $display("tuples: SP1 %0d, SP2 frozen %0d, SP2 reliable %0d, rate-1/T %0d", n_sp1, n_sp2f, n_sp2r, n_r1t);
    $display("G nodes %0d, top-stage look-ahead reads %0d, DTS with full list %0d, DTS dropping %0d, permutations %0d",
             n_g, n_top_g, n_dts_full, n_dts_drop, n_perm);
    checks++; if (n_sp1 == 0) begin failures++; $display("no SP1 tuple"); end
    checks++; if (n_sp2f == 0) begin failures++; $display("no frozen SP2 tuple"); end
    checks++; if (n_sp2r == 0) begin failures++; $display("no reliable SP2 tuple"); end
    checks++; if (n_r1t == 0) begin failures++; $display("no rate-1/T tuple"); end
    checks++; if (n_g == 0) begin failures++; $display("no G node"); end
    checks++; if (n_top_g == 0) begin failures++; $display("no top-stage look-ahead read"); end
    checks++; if (n_dts_full == 0) begin failures++; $display("list never full"); end
    checks++; if (llr_cmp == 0) begin failures++; $display("no LLR was compared"); end
    $display("stage-m LLRs compared with the reference: %0d", llr_cmp);
    checks++; if (n_dts_drop == 0) begin failures++; $display("DTS never dropped a path"); end
    checks++; if (n_perm == 0) begin failures++; $display("no lazy-copy permutation"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
