// tb_lscd_top -- end-to-end test of the decoder at reduced size
// (N = 64, L = 4, M = 4, P = 8); see lscd_tb_core for what is checked.
module tb_lscd_top;
  lscd_tb_core #(.FULL(1'b0), .N(64), .L(4), .M(4), .P(8), .FRAMES(6), .WDOG(100000)) u_core ();
endmodule
