// llr_crossbar -- L x L crossbar between the LLR memories and the PE arrays.
//
// With pointer-based lazy copy a path does not own the LLRs it reads: after
// list pruning, path l may continue from the data another path wrote.  Output
// l of the crossbar is the word of memory sel[l], so every PE array sees the
// operands of its own (logical) path while the memories stay in place.
// Purely combinational; any number of outputs may select the same input.
module llr_crossbar #(
  parameter int L  = 32,                 // list size = number of ports
  parameter int WB = 768,                // word width in bits (2*P*Q_LLR)
  localparam int LW = (L > 1) ? $clog2(L) : 1
) (
  input  logic [WB-1:0] din  [L],
  input  logic [LW-1:0] sel  [L],
  output logic [WB-1:0] dout [L]
);
  always_comb begin
    for (int l = 0; l < L; l++) dout[l] = din[sel[l]];
  end
endmodule
