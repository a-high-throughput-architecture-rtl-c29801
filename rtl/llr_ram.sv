// llr_ram -- word-organised LLR storage used for the per-path LLR memories,
// the channel buffer and the shared stage-(n-1) look-ahead buffer.
//
// A word holds W LLRs.  Two asynchronous read ports (ra, rb) return the two
// halves an SC node needs in the same cycle (the a-operands and the
// b-operands, 2*W LLRs in total); one synchronous write port stores W LLRs
// per clock.  The paper organises these memories in words of 2*P*Q_LLR bits;
// here that word is split into two W = P words with independent addresses so
// that the a- and b-halves of large stages can come from different rows.
// Written as a register array (no vendor macro).  Contents are not reset.
module llr_ram
  import lscd_pkg::*;
#(
  parameter int W     = 64,             // LLRs per word
  parameter int DEPTH = 8,              // words
  localparam int AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                       clk,
  input  logic                       we,
  input  logic [AW-1:0]             wa,
  input  llr_t [W-1:0]               wd,
  input  logic [AW-1:0]             ra,
  input  logic [AW-1:0]             rb,
  output llr_t [W-1:0]               qa,
  output llr_t [W-1:0]               qb
);
  llr_t [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[wa] <= wd;
  end

  assign qa = mem[ra];
  assign qb = mem[rb];
endmodule
