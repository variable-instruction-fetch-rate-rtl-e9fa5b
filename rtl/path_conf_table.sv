// path_conf_table: the path confidence table, ENTRIES saturating counters.
//
// Read port: when a thread path forks at a conditional branch, the hashed
// index of that branch selects a counter whose value rd_conf is returned in
// the same cycle (combinational read). Update port: when the branch executes,
// the counter at upd_idx is rewritten with the rule of conf_update, on the
// clock edge. A read of the entry being updated returns the old value.
// The table size (8132 entries) and counter width (4 bits) follow the paper.
// Resetting every counter to the lowest high-confidence value 2**(CW-1) is
// this design's choice.
module path_conf_table #(
  parameter int unsigned ENTRIES = 8132,
  parameter int unsigned CW      = 4,
  parameter int unsigned IDX_W   = $clog2(ENTRIES)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [IDX_W-1:0] rd_idx,
  output logic [CW-1:0]    rd_conf,
  input  logic             upd_valid,
  input  logic [IDX_W-1:0] upd_idx,
  input  logic             upd_correct,  // the branch went the predicted way
  output logic [CW-1:0]    upd_old       // counter value before this update
);
  localparam logic [CW-1:0] TH = CW'(1) << (CW - 1);

  logic [CW-1:0] ctr [ENTRIES];
  logic [CW-1:0] upd_new;

  assign rd_conf = ctr[rd_idx];
  assign upd_old = ctr[upd_idx];

  conf_update #(.CW(CW)) u_rule (.cur(upd_old), .correct(upd_correct), .nxt(upd_new));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int unsigned i = 0; i < ENTRIES; i++) ctr[i] <= TH;
    end else if (upd_valid) begin
      ctr[upd_idx] <= upd_new;
    end
  end

  initial assert (ENTRIES <= (1 << IDX_W)) else $error("IDX_W too small for ENTRIES");
endmodule
