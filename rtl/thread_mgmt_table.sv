// thread_mgmt_table: the Thread Management Table of the eager front end.
//
// One entry per thread ID, 2**ID_W entries. Each live entry holds the fields
// the paper lists: the next thread PC, the forked branch address, the thread
// level and the path confidence. It also keeps the entry's parent ID and
// parent level, which the rename pointer logic needs.
//
// Thread IDs follow the branch-history scheme. At reset one master thread,
// ID 0 at level 0, starts at start_pc with full confidence. A path of ID i at
// level k forking on a conditional branch leaves two paths at level k+1: the
// not-taken path keeps ID i (bit k = 0), the taken path gets ID i | 1<<k
// (bit k = 1). A path already at MAX_LEVEL cannot fork: it follows the
// branch predictor's direction and fork_at_max tells the caller so.
//
// When a branch forked at level k by path i executes (res_*), every live
// path that descends from that fork and took the wrong direction is killed:
// its ID agrees with i in bits k-1..0, its level exceeds k and its bit k
// differs from the outcome. kill[] shows the killed IDs in that cycle.
//
// When only one path is left and rebase_allow is high, that path becomes the
// new master: it moves to ID 0 at level 0 with full confidence (rebase_fire).
// Renumbering the levels this way, rather than the wrap-around of levels the
// rename flow chart hints at, is this design's choice, as are the redirect
// port (correcting a path after a predicted branch went wrong) and the
// priority order kill > fork > redirect > PC advance.
//
// The combinational outputs about fork_id and the ent_* arrays show the
// state before the coming clock edge; all updates take effect on that edge.
module thread_mgmt_table #(
  parameter int unsigned ID_W      = 20,
  parameter int unsigned PC_W      = 32,
  parameter int unsigned CONF_W    = 16,
  parameter int unsigned PORTS     = 4,
  parameter int unsigned FW        = 32,
  parameter int unsigned MAX_LEVEL = ID_W,
  parameter int unsigned N         = 1 << ID_W,
  parameter int unsigned LV_W      = $clog2(MAX_LEVEL + 2),
  parameter int unsigned CNT_W     = $clog2(FW + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [PC_W-1:0]      start_pc,
  // table contents, read by the scheduler and the fetch path
  output logic [N-1:0]         ent_valid,
  output logic [PC_W-1:0]      ent_pc        [N],
  output logic [PC_W-1:0]      ent_fork_addr [N],
  output logic [LV_W-1:0]      ent_level     [N],
  output logic [CONF_W-1:0]    ent_conf      [N],
  output logic [ID_W-1:0]      ent_parent_id [N],
  output logic [LV_W-1:0]      ent_parent_lv [N],
  // fork of path fork_id at the conditional branch fork_br_pc
  input  logic                 fork_valid,
  input  logic [ID_W-1:0]      fork_id,
  input  logic [PC_W-1:0]      fork_br_pc,
  input  logic [PC_W-1:0]      fork_taken_pc,
  input  logic [PC_W-1:0]      fork_nt_pc,
  input  logic                 fork_pred_taken,  // predictor's direction
  input  logic [CONF_W-1:0]    fork_pred_conf,   // confidence of the predicted child
  input  logic [CONF_W-1:0]    fork_alt_conf,    // confidence of the other child
  output logic [CONF_W-1:0]    fork_parent_conf,
  output logic [LV_W-1:0]      fork_parent_lv,
  output logic [ID_W-1:0]      fork_child_id,    // ID of the taken child
  output logic                 fork_at_max,      // no fork: predictor followed
  output logic                 fork_done,        // a fork is written this edge
  // correction of a path's PC after a wrong prediction at MAX_LEVEL
  input  logic                 redir_valid,
  input  logic [ID_W-1:0]      redir_id,
  input  logic [PC_W-1:0]      redir_pc,
  // PC advance by the instructions fetched this cycle ("set next path")
  input  logic [PORTS-1:0]     adv_valid,
  input  logic [ID_W-1:0]      adv_id    [PORTS],
  input  logic [CNT_W-1:0]     adv_count [PORTS],
  // branch execution: the fork of path res_id at level res_level resolved
  input  logic                 res_valid,
  input  logic [ID_W-1:0]      res_id,
  input  logic [LV_W-1:0]      res_level,
  input  logic                 res_taken,
  output logic [N-1:0]         kill,
  // collapse of the last remaining path to the master thread
  input  logic                 rebase_allow,
  output logic                 rebase_fire,
  output logic [ID_W-1:0]      rebase_from,
  output logic [$clog2(N+1)-1:0] live_count
);
  import mp_pkg::*;

  localparam logic [CONF_W-1:0] CONF_ONE = '1;

  logic [N-1:0]      valid_q;
  logic [PC_W-1:0]   pc_q      [N];
  logic [PC_W-1:0]   faddr_q   [N];
  logic [LV_W-1:0]   level_q   [N];
  logic [CONF_W-1:0] conf_q    [N];
  logic [ID_W-1:0]   pid_q     [N];
  logic [LV_W-1:0]   plv_q     [N];

  assign ent_valid     = valid_q;
  assign ent_pc        = pc_q;
  assign ent_fork_addr = faddr_q;
  assign ent_level     = level_q;
  assign ent_conf      = conf_q;
  assign ent_parent_id = pid_q;
  assign ent_parent_lv = plv_q;

  // ---- kill mask of a resolving branch ----
  logic [ID_W-1:0] res_mask;
  always_comb begin
    res_mask = '0;
    for (int unsigned b = 0; b < ID_W; b++)
      if (LV_W'(b) < res_level) res_mask[b] = 1'b1;
    kill = '0;
    if (res_valid && res_level < LV_W'(MAX_LEVEL))
      for (int unsigned j = 0; j < N; j++)
        if (valid_q[j] && level_q[j] > res_level &&
            ((ID_W'(j) & res_mask) == (res_id & res_mask)) &&
            (ID_W'(j >> res_level) & ID_W'(1)) != ID_W'(res_taken))
          kill[j] = 1'b1;
  end

  // ---- fork ----
  logic fork_ok;
  always_comb begin
    fork_parent_conf = conf_q[fork_id];
    fork_parent_lv   = level_q[fork_id];
    fork_child_id    = fork_id | (ID_W'(1) << level_q[fork_id]);
    fork_at_max      = fork_valid && valid_q[fork_id] && !kill[fork_id] &&
                       level_q[fork_id] >= LV_W'(MAX_LEVEL);
    fork_ok          = fork_valid && valid_q[fork_id] && !kill[fork_id] &&
                       level_q[fork_id] < LV_W'(MAX_LEVEL);
    fork_done        = fork_ok;
  end

  // ---- live paths and rebase ----
  logic [ID_W-1:0] only_id;
  always_comb begin
    live_count = '0;
    only_id    = '0;
    for (int unsigned j = 0; j < N; j++)
      if (valid_q[j]) begin
        live_count = live_count + 1'b1;
        only_id    = ID_W'(j);
      end
    rebase_from = only_id;
    rebase_fire = rebase_allow && live_count == 1 && !res_valid && !fork_valid &&
                  !redir_valid && (only_id != '0 || level_q[only_id] != '0);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      valid_q <= N'(1);
      for (int unsigned j = 0; j < N; j++) begin
        pc_q[j]    <= '0;
        faddr_q[j] <= '0;
        level_q[j] <= '0;
        conf_q[j]  <= '0;
        pid_q[j]   <= '0;
        plv_q[j]   <= '1;
      end
      pc_q[0]   <= start_pc;
      conf_q[0] <= CONF_ONE;
    end else begin
      // PC advance of the paths fetched this cycle
      for (int unsigned p = 0; p < PORTS; p++)
        if (adv_valid[p])
          pc_q[adv_id[p]] <= pc_q[adv_id[p]] + PC_W'(adv_count[p]) * PC_W'(INSN_BYTES);
      if (redir_valid) pc_q[redir_id] <= redir_pc;
      if (fork_at_max) pc_q[fork_id] <= fork_pred_taken ? fork_taken_pc : fork_nt_pc;
      if (fork_ok) begin
        // not-taken child keeps the ID
        pc_q[fork_id]       <= fork_nt_pc;
        faddr_q[fork_id]    <= fork_br_pc;
        level_q[fork_id]    <= level_q[fork_id] + 1'b1;
        conf_q[fork_id]     <= fork_pred_taken ? fork_alt_conf : fork_pred_conf;
        // taken child gets bit <level> set
        valid_q[fork_child_id] <= 1'b1;
        pc_q[fork_child_id]    <= fork_taken_pc;
        faddr_q[fork_child_id] <= fork_br_pc;
        level_q[fork_child_id] <= level_q[fork_id] + 1'b1;
        conf_q[fork_child_id]  <= fork_pred_taken ? fork_pred_conf : fork_alt_conf;
        pid_q[fork_child_id]   <= fork_id;
        plv_q[fork_child_id]   <= level_q[fork_id];
      end
      for (int unsigned j = 0; j < N; j++)
        if (kill[j]) valid_q[j] <= 1'b0;
      if (rebase_fire) begin
        valid_q          <= N'(1);
        pc_q[0]          <= pc_q[only_id];
        faddr_q[0]       <= faddr_q[only_id];
        level_q[0]       <= '0;
        conf_q[0]        <= CONF_ONE;
        pid_q[0]         <= '0;
        plv_q[0]         <= '1;
      end
    end
  end

  // A fork must never land on a live entry.
  always_ff @(posedge clk)
    if (rst_n && fork_ok)
      assert (!valid_q[fork_child_id]) else $error("fork onto a live thread ID");
endmodule
