// tb_lscd_full -- end-to-end test of the decoder with every parameter at its
// default (N = 1024, L = 32, M = 8, P = 64): two frames, see lscd_tb_core.
module tb_lscd_full;
  lscd_tb_core #(.FULL(1'b1), .N(1024), .L(32), .M(8), .P(64), .FRAMES(2), .WDOG(100000)) u_core ();
endmodule
