// tb_llr_crossbar -- random words and random selections (repeats allowed)
// on an L = 8 crossbar; every output must equal the selected input.
module tb_llr_crossbar;
  localparam int L = 8, WB = 48;
  logic [WB-1:0] din [L], dout [L];
  logic [2:0]    sel [L];
  int checks = 0, failures = 0;
  llr_crossbar #(.L(L), .WB(WB)) dut (.*);
  initial begin
    fork begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end join_none
    for (int n = 0; n < 500; n++) begin
      for (int l = 0; l < L; l++) begin din[l] = {$urandom, $urandom}; sel[l] = 3'($urandom); end
      #1;
      for (int l = 0; l < L; l++) begin checks++; if (dout[l] != din[sel[l]]) failures++; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
