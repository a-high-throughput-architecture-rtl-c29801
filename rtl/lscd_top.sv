// lscd_top -- list successive-cancellation decoder for polar codes with a
// large list size: L parallel SC paths, multi-bit double-thresholding list
// management below stage m = log2(M), look-ahead at the top stage.
//
// Data flow (one frame):
//   1. The N channel LLRs are written into the channel buffer (P LLRs per
//      clock, word w holding LLRs wP .. wP+P-1) and the bit classes into the
//      code-set ROM of the control unit (any time while idle).
//   2. start: PE array 0 computes the top stage n-1 in look-ahead form,
//      F, G(ps=0), G(ps=1), into three shared buffers (N/(2P) clocks).  All
//      paths read stage n-1 from there; a path's own partial sums pick the G
//      candidate in the PE input stage, so the channel LLRs are not needed
//      again and stage n-1 is stored once rather than L times.
//   3. For each sub-tree j at stage m: the L PE arrays compute the SC nodes
//      from the highest changed stage down to stage m, reading stage s+1
//      through the L x L crossbar (pointer-based lazy copy: path l reads
//      the memory src[l][s+1] that holds its data) and writing stage s into
//      their own LLR memory.  The stage-m LLRs go to the LM module, which
//      decodes the sub-tree tuple by tuple (PMU, sorting, DTS).  Then the
//      partial sums, path memory and pointers follow the surviving paths.
//   4. The CRC unit checks every path and outputs the chosen word on dout
//      with crc_ok; done pulses for one clock.
// Interface timing: inputs are sampled on the rising clock edge; rst_n is
// asynchronous, active low.  Requirements: M <= P, N >= 4P, N >= 4M.
module lscd_top
  import lscd_pkg::*;
#(
  parameter int N      = 1024,           // code length
  parameter int L      = 32,             // list size
  parameter int M      = 8,              // bits merged per sub-tree (2^m)
  parameter int P      = 64,             // PEs per path
  parameter int RT_IDX = (L == 32) ? 25 : (L == 16) ? 12 : (L == 8) ? 6 : L - 1,  // RT rank
  localparam int NS = $clog2(N),
  localparam int MS = $clog2(M),
  localparam int LW = (L > 1) ? $clog2(L) : 1,
  localparam int CHW = $clog2(N / P)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             cfg_we,
  input  logic [NS-1:0]    cfg_addr,
  input  bit_class_e       cfg_cls,
  input  logic             ch_we,
  input  logic [CHW-1:0]   ch_addr,
  input  llr_t [P-1:0]     ch_data,
  input  logic             start,
  output logic             busy,
  output logic             done,
  output logic [N-1:0]     dout,
  output logic             crc_ok
);
  localparam int MB = (M > 1) ? $clog2(M) : 1;
  localparam int JW = NS - MS;
  localparam int SW = $clog2(NS + 1);
  localparam int CW = $clog2(N / P + 1);
  localparam int WB = 2 * P * QLLR;

  function automatic int ncyc(int s);
    return ((1 << s) > P) ? (1 << s) / P : 1;
  endfunction
  // first word of stage s in a path's LLR memory (stages m+1 .. n-2)
  function automatic int base(int s);
    int b;
    b = 0;
    for (int k = MS + 1; k < s; k++) b += ncyc(k);
    return b;
  endfunction
  localparam int DEPTH_RAW = base(NS - 1);
  localparam int DEPTH     = (DEPTH_RAW > 0) ? DEPTH_RAW : 1;
  localparam int AW        = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int HW        = (N / (2 * P) > 1) ? $clog2(N / (2 * P)) : 1;

  // ---------------- control ----------------
  logic          pcms, scd, node_g, lm_load, lm_init, lm_start, upd, clr, crc_start;
  logic [SW-1:0] stage;
  logic [CW-1:0] cyc;
  logic [JW-1:0] sub_idx;
  logic [MB-1:0] t_off, t_q;
  logic [MB:0]   t_log;
  tuple_e        t_kind;
  logic [N-1:0]  info;
  logic          lm_busy, lm_done, crc_busy, crc_done, dts_used;

  control_unit #(.N(N), .M(M), .P(P)) u_ctl (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_cls,
    .start, .lm_done, .crc_done, .busy,
    .pcms, .scd, .stage, .cyc, .node_g, .lm_load, .sub_idx,
    .lm_init, .lm_start, .t_off, .t_log, .t_kind, .t_q,
    .upd, .clr, .crc_start, .info
  );

  // ---------------- channel buffer and shared top stage ----------------
  llr_t [P-1:0] ch_qa, ch_qb;
  llr_ram #(.W(P), .DEPTH(N / P)) u_chnl (
    .clk, .we(ch_we), .wa(ch_addr), .wd(ch_data),
    .ra(CHW'(cyc)), .rb(CHW'(int'(cyc) + N / (2 * P))), .qa(ch_qa), .qb(ch_qb)
  );

  llr_t [P-1:0] pe_o0 [L], pe_o1 [L], pe_o2 [L];
  logic [HW-1:0] top_ra, top_rb;
  llr_t [P-1:0] f_qa, f_qb, g0_qa, g0_qb, g1_qa, g1_qb;
  assign top_ra = HW'(cyc);
  assign top_rb = HW'(int'(cyc) + N / (4 * P));
  llr_ram #(.W(P), .DEPTH(N / (2 * P))) u_top_f (
    .clk, .we(pcms), .wa(HW'(cyc)), .wd(pe_o0[0]), .ra(top_ra), .rb(top_rb), .qa(f_qa), .qb(f_qb));
  llr_ram #(.W(P), .DEPTH(N / (2 * P))) u_top_g0 (
    .clk, .we(pcms), .wa(HW'(cyc)), .wd(pe_o1[0]), .ra(top_ra), .rb(top_rb), .qa(g0_qa), .qb(g0_qb));
  llr_ram #(.W(P), .DEPTH(N / (2 * P))) u_top_g1 (
    .clk, .we(pcms), .wa(HW'(cyc)), .wd(pe_o2[0]), .ra(top_ra), .rb(top_rb), .qa(g1_qa), .qb(g1_qb));

  // ---------------- per-path LLR memories and crossbar ----------------
  logic [AW-1:0] mem_ra, mem_rb, mem_wa;
  logic          mem_we;
  logic [LW-1:0] src [L][NS];             // lazy-copy pointers per stage
  logic [WB-1:0] xb_in [L], xb_out [L];
  logic [LW-1:0] xb_sel [L];

  always_comb begin
    int s1;
    s1 = int'(stage) + 1;
    if ((1 << s1) >= 2 * P) begin
      mem_ra = AW'(base(s1) + int'(cyc));
      mem_rb = AW'(base(s1) + int'(cyc) + (1 << int'(stage)) / P);
    end else begin
      mem_ra = AW'(base(s1));
      mem_rb = AW'(base(s1));
    end
    mem_wa = AW'(base(int'(stage)) + int'(cyc));
    mem_we = scd && (int'(stage) > MS);
    for (int l = 0; l < L; l++) xb_sel[l] = src[l][s1 < NS ? s1 : 0];
  end

  for (genvar l = 0; l < L; l++) begin : g_mem
    llr_t [P-1:0] qa, qb;
    llr_ram #(.W(P), .DEPTH(DEPTH)) u_mem (
      .clk, .we(mem_we), .wa(mem_wa), .wd(pe_o1[l]), .ra(mem_ra), .rb(mem_rb), .qa(qa), .qb(qb));
    assign xb_in[l] = {qb, qa};
  end

  llr_crossbar #(.L(L), .WB(WB)) u_xbar (.din(xb_in), .sel(xb_sel), .dout(xb_out));

  // ---------------- partial sums, PE arrays ----------------
  logic [N-1:0]  ps [L];
  logic [LW-1:0] perm [L];
  logic [M-1:0]  u_sub [L];
  pm_t           gamma [L];
  logic [L-1:0]  valid;

  for (genvar l = 0; l < L; l++) begin : g_pe
    llr_t [P-1:0] a0, a1, b0, b1;
    logic [P-1:0] sa, sb, pg;
    logic         glah;
    always_comb begin
      llr_t [P-1:0] wa, wb;
      {wb, wa} = xb_out[l];
      glah = 1'b0;
      for (int i = 0; i < P; i++) begin
        int ia, ib, ig;
        ia = (N / 2) + int'(cyc) * P + i;
        ib = ia + N / 4;
        ig = (1 << int'(stage)) + int'(cyc) * P + i;
        sa[i] = 1'b0;
        sb[i] = 1'b0;
        pg[i] = ps[l][ig < N ? ig : 0];
        if (pcms) begin
          a0[i] = (l == 0) ? ch_qa[i] : '0;
          b0[i] = (l == 0) ? ch_qb[i] : '0;
          a1[i] = a0[i];
          b1[i] = b0[i];
        end else if (int'(stage) + 1 == NS - 1) begin
          // stage n-1 comes from the shared look-ahead buffers
          if (int'(sub_idx) >= N / (2 * M)) begin
            a0[i] = g0_qa[i]; a1[i] = g1_qa[i];
            b0[i] = g0_qb[i]; b1[i] = g1_qb[i];
            sa[i] = ps[l][ia < N ? ia : 0];
            sb[i] = ps[l][ib < N ? ib : 0];
          end else begin
            a0[i] = f_qa[i]; a1[i] = f_qa[i];
            b0[i] = f_qb[i]; b1[i] = f_qb[i];
          end
        end else if ((1 << (int'(stage) + 1)) >= 2 * P) begin
          a0[i] = wa[i]; a1[i] = wa[i];
          b0[i] = wb[i]; b1[i] = wb[i];
        end else begin
          a0[i] = wa[i];
          b0[i] = wa[(i + (1 << int'(stage))) % P];
          a1[i] = a0[i];
          b1[i] = b0[i];
        end
      end
      glah = pcms && (l == 0);
    end
    pe_array #(.P(P)) u_pe (
      .a0, .a1, .b0, .b1, .sel_a(sa), .sel_b(sb),
      .glah, .is_f(~node_g), .ps(pg),
      .o0(pe_o0[l]), .o1(pe_o1[l]), .o2(pe_o2[l])
    );
  end

  // lazy-copy pointers: written stage belongs to the writer; after a
  // sub-tree every path inherits the pointers of its ancestor
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < L; l++)
        for (int s = 0; s < NS; s++) src[l][s] <= LW'(l);
    end else if (mem_we) begin
      for (int l = 0; l < L; l++) src[l][stage] <= LW'(l);
    end else if (upd) begin
      for (int l = 0; l < L; l++)
        for (int s = 0; s < NS; s++) src[l][s] <= src[perm[l]][s];
    end
  end

  // ---------------- list management ----------------
  llr_t [M-1:0] lm_in [L];
  always_comb for (int l = 0; l < L; l++) lm_in[l] = pe_o1[l][M-1:0];

  lm_module #(.L(L), .M(M), .RT_IDX(RT_IDX)) u_lm (
    .clk, .rst_n, .init(lm_init), .load(lm_load), .llr_in(lm_in),
    .start(lm_start), .off(t_off), .t(t_log), .kind(t_kind), .q(t_q),
    .busy(lm_busy), .done(lm_done), .gamma, .valid, .u_sub, .perm, .dts_used
  );

  ps_network #(.N(N), .L(L), .M(M)) u_ps (
    .clk, .rst_n, .clr, .upd, .sub_idx, .perm, .u_sub, .ps
  );

  logic [N-1:0] u [L];
  path_mem #(.N(N), .L(L), .M(M)) u_path (
    .clk, .rst_n, .clr, .upd, .sub_idx, .perm, .u_sub, .u
  );

  logic [LW-1:0] sel_path;
  crc_unit #(.N(N), .L(L), .M(M)) u_crc (
    .clk, .rst_n, .start(crc_start), .u, .info, .gamma, .valid,
    .busy(crc_busy), .done(crc_done), .dout, .crc_ok, .sel_path
  );
  assign done = crc_done;
endmodule
