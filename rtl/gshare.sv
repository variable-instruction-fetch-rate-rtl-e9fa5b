// gshare: two-bit counter branch predictor indexed by PC XOR history.
//
// In the eager front end it is consulted only when a path that meets a
// conditional branch is already at the maximum thread level, so no further
// fork is possible; its prediction also tells the fork which child is the
// predicted one. Its size (16384 entries, 16 history bits) follows the paper;
// the index (word address XOR history, low IDX_W bits), the counter encoding
// (>= 2 predicts taken) and the reset value (1, weakly not taken) are the
// usual gshare choices, made here because the paper takes the predictor from
// earlier work.
// Lookup is combinational; the update is written on the clock edge.
module gshare #(
  parameter int unsigned ENTRIES = 16384,
  parameter int unsigned HIST_W  = 16,
  parameter int unsigned PC_W    = 32,
  parameter int unsigned IDX_W   = $clog2(ENTRIES)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [HIST_W-1:0] hist,
  input  logic [PC_W-1:0]   lk_pc,      // branch to predict
  output logic              lk_taken,
  input  logic              upd_valid,  // branch executed
  input  logic [PC_W-1:0]   upd_pc,
  input  logic              upd_taken
);
  logic [1:0] ctr [ENTRIES];
  logic [IDX_W-1:0] lk_idx, upd_idx;
  logic [1:0] upd_old;

  function automatic logic [IDX_W-1:0] index(input logic [PC_W-1:0] pc, input logic [HIST_W-1:0] h);
    logic [PC_W+HIST_W-1:0] m;
    m = (PC_W+HIST_W)'(pc >> 2) ^ (PC_W+HIST_W)'(h);
    return m[IDX_W-1:0];
  endfunction

  assign lk_idx   = index(lk_pc, hist);
  assign upd_idx  = index(upd_pc, hist);
  assign lk_taken = ctr[lk_idx][1];
  assign upd_old  = ctr[upd_idx];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int unsigned i = 0; i < ENTRIES; i++) ctr[i] <= 2'd1;
    end else if (upd_valid) begin
      if (upd_taken && upd_old != 2'd3)       ctr[upd_idx] <= upd_old + 2'd1;
      else if (!upd_taken && upd_old != 2'd0) ctr[upd_idx] <= upd_old - 2'd1;
    end
  end
endmodule
