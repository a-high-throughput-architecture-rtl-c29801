// tb_crc_unit -- N = 64, L = 4, M = 8, CRC-24.  Each trial fills the paths
// with random words over a random information set, gives some of them a
// correct checksum, and checks the chosen word, crc_ok and the latency of
// N/M + 1 clocks (selection: valid, passing, smallest metric, lowest index;
// otherwise the valid path with the smallest metric).
module tb_crc_unit;
  import lscd_pkg::*;
  localparam int N = 64, L = 4, M = 8, R = 24;
  localparam logic [R-1:0] POLY = 24'h864CFB;
  logic clk = 0, rst_n = 0, start = 0;
  logic [N-1:0] u [L], info, dout;
  pm_t gamma [L];
  logic [L-1:0] valid;
  logic busy, done, crc_ok;
  logic [1:0] sel_path;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  crc_unit #(.N(N), .L(L), .M(M)) dut (.*);

  function automatic logic [N-1:0] make_word(bit good);
    int pos [N], k;
    logic [N-1:0] w;
    logic [R-1:0] c;
    k = 0; w = '0;
    for (int i = 0; i < N; i++) if (info[i]) begin pos[k] = i; k++; end
    c = '0;
    for (int b = 0; b < k - R; b++) begin
      logic bit_v, fb;
      bit_v = 1'($urandom); w[pos[b]] = bit_v;
      fb = c[R-1] ^ bit_v; c = {c[R-2:0], 1'b0} ^ (fb ? POLY : '0);
    end
    if (!good) c[0] = ~c[0];
    for (int b = 0; b < R; b++) w[pos[k - R + b]] = c[R - 1 - b];
    return w;
  endfunction

  initial begin
    fork begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end join_none
    repeat (2) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 100; n++) begin
      int best, cyc; bit found;
      info = '0;
      while ($countones(info) < 40) info[$urandom % N] = 1'b1;
      valid = L'($urandom) | L'(1);
      for (int l = 0; l < L; l++) begin u[l] = make_word($urandom % 2); gamma[l] = pm_t'($urandom % 8); end
      found = 0; best = 0;
      for (int l = 0; l < L; l++) begin
        logic [R-1:0] c; c = '0;
        for (int i = 0; i < N; i++) if (info[i]) begin logic fb; fb = c[R-1] ^ u[l][i]; c = {c[R-2:0], 1'b0} ^ (fb ? POLY : '0); end
        if (valid[l] && c == 0 && (!found || gamma[l] < gamma[best])) begin found = 1; best = l; end
      end
      if (!found) begin
        bit any; any = 0;
        for (int l = 0; l < L; l++) if (valid[l] && (!any || gamma[l] < gamma[best])) begin any = 1; best = l; end
      end
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks += 3;
      if (dout != u[best]) failures++;
      if (crc_ok != found) failures++;
      if (cyc != N / M + 1) begin failures++; $display("latency %0d", cyc); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
