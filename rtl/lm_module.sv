// lm_module -- list management for the multi-bit double-thresholding scheme.
//
// The module holds, for each of the L list entries, the path metric, a
// valid flag, the M stage-m LLRs of the current sub-tree, the bits already
// decided in that sub-tree (u_sub) and perm: the index the entry had when the
// sub-tree started.  Entries are reordered only here during a sub-tree; the
// path memory, partial sums and LLR pointers follow perm once, when the
// sub-tree ends.
//
// A tuple (offset, size 2^t, class) is processed by one PMU per path, the
// shared sorter and the DTS block, with the class-dependent schedule:
//   SP2 (frozen or reliable only) : PMU                       1 cycle
//   SP1 (unreliable bit first)    : PMU (thresholds from the
//                                   current metrics) -> DTS   2 cycles
//   rate-1/T                      : PMU -> sorting -> DTS     3 cycles
// Interface: load copies stage-m LLRs into every entry (and resets u_sub and
// perm); start with a tuple descriptor begins a tuple, done pulses in the
// cycle its results are written.  init sets entry 0 valid with metric 0 and
// all other entries invalid.
module lm_module
  import lscd_pkg::*;
#(
  parameter int L      = 32,
  parameter int M      = 8,
  parameter int RT_IDX = (L == 32) ? 25 : (L == 16) ? 12 : (L == 8) ? 6 : L - 1,
  localparam int LW = (L > 1) ? $clog2(L) : 1,
  localparam int MB = (M > 1) ? $clog2(M) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          init,
  input  logic          load,
  input  llr_t [M-1:0]  llr_in [L],
  input  logic          start,
  input  logic [MB-1:0] off,
  input  logic [MB:0]   t,
  input  tuple_e        kind,
  input  logic [MB-1:0] q,
  output logic          busy,
  output logic          done,
  output pm_t           gamma [L],
  output logic [L-1:0]  valid,
  output logic [M-1:0]  u_sub [L],
  output logic [LW-1:0] perm  [L],
  output logic          dts_used       // a DTS selection was applied this cycle
);
  typedef enum logic [1:0] {S_IDLE, S_SORT, S_DTS} st_e;
  st_e st;

  llr_t [M-1:0] llr_m [L];
  // registered PMU results
  pm_t          th_r [L], mx_r [L];
  logic [L-1:0] bf_r;
  logic [M-1:0] ua_r [L], ub_r [L];
  logic [QPM:0] at_r, rt_r;
  logic [MB-1:0] off_r;
  logic [MB:0]   t_r;

  // per-path PMU
  pm_t          th_c [L], mx_c [L], pa_c [L];
  logic [L-1:0] bf_c;
  logic [M-1:0] ua_c [L], ub_c [L];
  for (genvar l = 0; l < L; l++) begin : g_pmu
    pmu #(.M(M)) u_pmu (
      .llr_m(llr_m[l]), .u_sub(u_sub[l]), .off(off), .t(t), .kind(kind), .q(q),
      .gamma(gamma[l]), .theta(th_c[l]), .pm_max(mx_c[l]), .b_first(bf_c[l]),
      .pm_a(pa_c[l]), .u_a(ua_c[l]), .u_b(ub_c[l])
    );
  end

  // shared sorter: current metrics (SP1) or registered theta (rate-1/T)
  pm_t          srt_in [L];
  logic [QPM:0] at_c, rt_c;
  always_comb for (int l = 0; l < L; l++) srt_in[l] = (st == S_SORT) ? th_r[l] : gamma[l];
  pm_sorter #(.L(L), .RT_IDX(RT_IDX)) u_sort (
    .pm(srt_in), .valid(valid), .at_key(at_c), .rt_key(rt_c)
  );

  // DTS on the registered PMU results
  logic [L-1:0]  d_valid, d_branch;
  logic [LW-1:0] d_parent [L];
  pm_t           d_pm [L];
  int unsigned   d_kept;
  dts #(.L(L)) u_dts (
    .valid(valid), .pm0(th_r), .pm1(mx_r), .at_key(at_r), .rt_key(rt_r),
    .nvalid(d_valid), .parent(d_parent), .branch(d_branch), .npm(d_pm), .n_kept(d_kept)
  );

  function automatic logic [M-1:0] put_bits(logic [M-1:0] u, logic [M-1:0] b,
                                            logic [MB-1:0] o, logic [MB:0] tt);
    logic [M-1:0] r;
    r = u;
    for (int j = 0; j < M; j++)
      if (j >= int'(o) && j < int'(o) + (1 << tt)) r[j] = b[j - int'(o)];
    return r;
  endfunction

  assign busy = (st != S_IDLE);
  assign dts_used = (st == S_DTS);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st    <= S_IDLE;
      done  <= 1'b0;
      valid <= '0;
      at_r  <= '0;
      rt_r  <= '0;
      off_r <= '0;
      t_r   <= '0;
      bf_r  <= '0;
      for (int l = 0; l < L; l++) begin
        gamma[l] <= '0;
        u_sub[l] <= '0;
        perm[l]  <= LW'(l);
        llr_m[l] <= '0;
        th_r[l]  <= '0;
        mx_r[l]  <= '0;
        ua_r[l]  <= '0;
        ub_r[l]  <= '0;
      end
    end else begin
      done <= 1'b0;
      if (init) begin
        valid <= L'(1);
        for (int l = 0; l < L; l++) gamma[l] <= '0;
      end
      if (load) begin
        for (int l = 0; l < L; l++) begin
          llr_m[l] <= llr_in[l];
          u_sub[l] <= '0;
          perm[l]  <= LW'(l);
        end
      end
      unique case (st)
        S_IDLE: if (start) begin
          off_r <= off;
          t_r   <= t;
          for (int l = 0; l < L; l++) begin
            th_r[l] <= th_c[l];
            mx_r[l] <= mx_c[l];
            ua_r[l] <= ua_c[l];
            ub_r[l] <= ub_c[l];
          end
          bf_r <= bf_c;
          unique case (kind)
            TUP_SP2_FRZ, TUP_SP2_RRL: begin
              for (int l = 0; l < L; l++) begin
                gamma[l] <= pa_c[l];
                u_sub[l] <= put_bits(u_sub[l], ua_c[l], off, t);
              end
              done <= 1'b1;
            end
            TUP_SP1: begin
              at_r <= at_c;
              rt_r <= rt_c;
              st   <= S_DTS;
            end
            default: st <= S_SORT;
          endcase
        end
        S_SORT: begin
          at_r <= at_c;
          rt_r <= rt_c;
          st   <= S_DTS;
        end
        default: begin                          // S_DTS
          for (int l = 0; l < L; l++) begin
            gamma[l] <= d_pm[l];
            llr_m[l] <= llr_m[d_parent[l]];
            perm[l]  <= perm[d_parent[l]];
            u_sub[l] <= put_bits(u_sub[d_parent[l]],
                                 (d_branch[l] ^ bf_r[d_parent[l]]) ? ub_r[d_parent[l]] : ua_r[d_parent[l]],
                                 off_r, t_r);
          end
          valid <= d_valid;
          done  <= 1'b1;
          st    <= S_IDLE;
        end
      endcase
    end
  end

  // list pruning never keeps more than L paths below the acceptance threshold
  always_ff @(posedge clk) if (st == S_DTS) assert (d_kept <= L);
endmodule
