// tb_llr_ram -- writes random words to every address, then reads them back
// through both ports at random addresses against a shadow copy.
module tb_llr_ram;
  import lscd_pkg::*;
  localparam int W = 4, D = 8;
  logic clk = 0, we = 0;
  logic [2:0] wa = 0, ra = 0, rb = 0;
  llr_t [W-1:0] wd = '0, qa, qb;
  llr_t [W-1:0] shadow [D];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  llr_ram #(.W(W), .DEPTH(D)) dut (.*);
  initial begin
    fork begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end join_none
    for (int r = 0; r < 4; r++) begin
      for (int a = 0; a < D; a++) begin
        @(negedge clk); we = 1; wa = 3'(a); wd = 24'($urandom); shadow[a] = wd;
      end
      @(negedge clk); we = 0;
      for (int n = 0; n < 32; n++) begin
        ra = 3'($urandom); rb = 3'($urandom); #1;
        checks += 2;
        if (qa != shadow[ra]) failures++;
        if (qb != shadow[rb]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
