// control_unit -- code-set ROM and decoding schedule of the LSCD.
//
// The ROM holds the class of every bit (frozen / unreliable / reliable); it
// is written through a configuration port so the code can be changed without
// changing the hardware.  From the ROM the unit derives, on line, the tuple
// division of each M-bit sub-tree (tuple_div, Algorithm 1) and sequences one
// frame:
//   PCMS : N/(2P) clocks.  The top stage n-1 is computed once for all paths
//          in look-ahead form (F, G for ps=0, G for ps=1) from the channel
//          buffer (pre-computation memory saving).
//   SCD  : for sub-tree j the nodes from the highest stage that changes down
//          to stage m, depth first.  The first node is a G node when j is odd
//          at that stage (j != 0 and below stage n-1), the others are F nodes.
//          A node at stage s takes max(1, 2^s/P) clocks.  The stage-m node
//          loads the LM module.
//   LM   : the tuples of the sub-tree, one LM operation each (1-3 clocks).
//   UPD  : 1 clock, partial sums, path memory and LLR pointers follow the
//          surviving paths.
//   CRC  : N/M + 1 clocks, then done.
// The LM-tuple and the look-ahead at the top stage follow the paper.  Not
// implemented (so this schedule is longer than the published latency): the
// look-ahead of G nodes in the other fully-parallel stages, the merging of
// the stage-m F node with the following PMU, and the skipping of the
// all-zero prefix before the first information bit.
module control_unit
  import lscd_pkg::*;
#(
  parameter int N = 1024,
  parameter int M = 8,
  parameter int P = 64,
  localparam int NS = $clog2(N),
  localparam int MS = $clog2(M),
  localparam int MB = (M > 1) ? $clog2(M) : 1,
  localparam int JW = NS - MS,
  localparam int SW = $clog2(NS + 1),
  localparam int CW = $clog2(N / P + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  // code-set ROM write port
  input  logic          cfg_we,
  input  logic [NS-1:0] cfg_addr,
  input  bit_class_e    cfg_cls,
  // frame control
  input  logic          start,
  input  logic          lm_done,
  input  logic          crc_done,
  output logic          busy,
  // schedule
  output logic          pcms,            // top-stage look-ahead step
  output logic          scd,             // SC node step
  output logic [SW-1:0] stage,           // stage of the SC node
  output logic [CW-1:0] cyc,             // clock inside the node / PCMS word
  output logic          node_g,          // the node is a G node
  output logic          lm_load,         // stage-m node: LLRs into the LM module
  output logic [JW-1:0] sub_idx,         // current sub-tree j
  output logic          lm_init,
  output logic          lm_start,
  output logic [MB-1:0] t_off,
  output logic [MB:0]   t_log,
  output tuple_e        t_kind,
  output logic [MB-1:0] t_q,
  output logic          upd,
  output logic          clr,
  output logic          crc_start,
  output logic [N-1:0]  info
);
  typedef enum logic [2:0] {C_IDLE, C_PCMS, C_SCD, C_LM0, C_LM, C_UPD, C_CRC} cst_e;
  cst_e st;

  bit_class_e rom [N];
  always_ff @(posedge clk) if (cfg_we) rom[cfg_addr] <= cfg_cls;
  always_comb for (int i = 0; i < N; i++) info[i] = (rom[i] != BIT_FRZ);

  // tuple division of the current sub-tree
  bit_class_e    sub_cls [M];
  logic [MB:0]   toff;                    // offset of the next tuple (M = finished)
  always_comb for (int b = 0; b < M; b++) sub_cls[b] = rom[int'(sub_idx) * M + b];
  tuple_div #(.M(M)) u_div (
    .cls(sub_cls), .off(MB'(toff)), .t(t_log), .kind(t_kind), .q(t_q)
  );
  assign t_off = MB'(toff);

  function automatic int ncyc(int s);
    return ((1 << s) > P) ? (1 << s) / P : 1;
  endfunction

  // first stage of sub-tree j and whether it is a G node
  function automatic logic [SW:0] first_stage(logic [JW-1:0] jj, output logic g);
    int tz;
    g  = 1'b0;
    if (jj == '0) return (SW+1)'(NS - 2);
    tz = 0;
    while (tz < JW && jj[tz] == 1'b0) tz++;
    if (MS + tz >= NS - 1) return (SW+1)'(NS - 2);
    g = 1'b1;
    return (SW+1)'(MS + tz);
  endfunction

  assign busy      = (st != C_IDLE);
  assign pcms      = (st == C_PCMS);
  assign scd       = (st == C_SCD);
  assign lm_load   = (st == C_SCD) && (int'(stage) == MS);
  assign lm_start  = (st == C_LM0) || (st == C_LM && lm_done && int'(toff) < M);
  assign upd       = (st == C_UPD);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= C_IDLE;
      stage     <= '0;
      cyc       <= '0;
      node_g    <= 1'b0;
      sub_idx   <= '0;
      toff      <= '0;
      lm_init   <= 1'b0;
      clr       <= 1'b0;
      crc_start <= 1'b0;
    end else begin
      lm_init   <= 1'b0;
      clr       <= 1'b0;
      crc_start <= 1'b0;
      unique case (st)
        C_IDLE: if (start) begin
          st      <= C_PCMS;
          cyc     <= '0;
          sub_idx <= '0;
          lm_init <= 1'b1;
          clr     <= 1'b1;
        end
        C_PCMS: begin
          if (int'(cyc) == N / (2 * P) - 1) begin
            logic g;
            logic [SW:0] fs;
            fs     = first_stage('0, g);
            st     <= C_SCD;
            stage  <= SW'(fs);
            node_g <= g;
            cyc    <= '0;
          end else cyc <= cyc + 1'b1;
        end
        C_SCD: begin
          if (int'(cyc) == ncyc(int'(stage)) - 1) begin
            cyc    <= '0;
            node_g <= 1'b0;
            if (int'(stage) == MS) begin
              st   <= C_LM0;
              toff <= '0;
            end else stage <= stage - 1'b1;
          end else cyc <= cyc + 1'b1;
        end
        C_LM0: begin
          toff <= toff + (MB+1)'(1 << t_log);
          st   <= C_LM;
        end
        C_LM: begin
          if (lm_done) begin
            if (int'(toff) < M) toff <= toff + (MB+1)'(1 << t_log);
            else st <= C_UPD;
          end
        end
        C_UPD: begin
          if (int'(sub_idx) == N / M - 1) begin
            st        <= C_CRC;
            crc_start <= 1'b1;
          end else begin
            logic g;
            logic [SW:0] fs;
            fs      = first_stage(sub_idx + 1'b1, g);
            sub_idx <= sub_idx + 1'b1;
            stage   <= SW'(fs);
            node_g  <= g;
            cyc     <= '0;
            st      <= C_SCD;
          end
        end
        default: begin                          // C_CRC
          if (crc_done) st <= C_IDLE;
        end
      endcase
    end
  end
endmodule
