// branch_history: the global branch history bits.
//
// A shift register of resolved conditional-branch outcomes (1 = taken), the
// newest in bit 0. It feeds the hash of the path confidence table and the
// gshare index. Updating it at branch execution, not at fetch, and clearing
// it at reset are this design's choices; the paper only names the register
// and gives its length (16 history bits).
// Timing: the shifted value is visible the cycle after upd_valid.
module branch_history #(
  parameter int unsigned HIST_W = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              upd_valid,  // a conditional branch executed
  input  logic              upd_taken,  // its outcome
  output logic [HIST_W-1:0] hist
);
  always_ff @(posedge clk) begin
    if (!rst_n)         hist <= '0;
    else if (upd_valid) hist <= {hist[HIST_W-2:0], upd_taken};
  end
endmodule
