// crc_unit -- CRC check of all list paths and selection of the output word.
//
// After the last sub-tree, the N-bit vectors of the L paths are scanned M
// bits per clock, all paths in parallel.  Only information bits (info mask
// from the code-set ROM) enter each path's CRC register (polynomial POLY of
// degree R, zero initial value, MSB first); the last R information bits are
// the transmitted checksum, so a correct path leaves a zero register.  When
// the scan ends, the valid path that passes with the smallest metric is
// selected (lowest index on ties); when none passes, the valid path with the
// smallest metric is output and crc_ok is 0.  The paper states only that the
// path passing the check is output; scan width, the tie rule and the
// fall-back are this design's choices.  Latency: N/M + 1 clocks from start
// to done.
module crc_unit
  import lscd_pkg::*;
#(
  parameter int          N    = 1024,
  parameter int          L    = 32,
  parameter int          M    = 8,
  parameter int          R    = 24,
  parameter logic [R-1:0] POLY = 24'h864CFB,   // CRC-24 0x1864CFB without x^24
  localparam int LW = (L > 1) ? $clog2(L) : 1,
  localparam int JW = $clog2(N / M)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [N-1:0]  u     [L],
  input  logic [N-1:0]  info,            // 1: information bit
  input  pm_t           gamma [L],
  input  logic [L-1:0]  valid,
  output logic          busy,
  output logic          done,
  output logic [N-1:0]  dout,
  output logic          crc_ok,
  output logic [LW-1:0] sel_path
);
  logic [R-1:0]  crc [L];
  logic [JW-1:0] j;
  logic [R-1:0]  crc_n [L];

  always_comb begin
    for (int l = 0; l < L; l++) begin
      logic [R-1:0] c;
      logic         fb;
      c = crc[l];
      for (int b = 0; b < M; b++) begin
        fb = c[R-1] ^ u[l][int'(j) * M + b];
        if (info[int'(j) * M + b]) c = {c[R-2:0], 1'b0} ^ (fb ? POLY : '0);
      end
      crc_n[l] = c;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      done     <= 1'b0;
      j        <= '0;
      dout     <= '0;
      crc_ok   <= 1'b0;
      sel_path <= '0;
      for (int l = 0; l < L; l++) crc[l] <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy <= 1'b1;
        j    <= '0;
        for (int l = 0; l < L; l++) crc[l] <= '0;
      end else if (busy) begin
        crc <= crc_n;
        j   <= j + 1'b1;
        if (j == JW'(N / M - 1)) begin
          logic found, any;
          int   best, bestv;
          found = 1'b0; any = 1'b0; best = 0; bestv = 0;
          for (int l = 0; l < L; l++) begin
            if (valid[l] && crc_n[l] == '0 && (!found || gamma[l] < gamma[best])) begin
              found = 1'b1;
              best  = l;
            end
            if (valid[l] && (!any || gamma[l] < gamma[bestv])) begin
              any   = 1'b1;
              bestv = l;
            end
          end
          if (!found) best = bestv;
          dout     <= u[best];
          crc_ok   <= found;
          sel_path <= LW'(best);
          busy     <= 1'b0;
          done     <= 1'b1;
        end
      end
    end
  end
endmodule
