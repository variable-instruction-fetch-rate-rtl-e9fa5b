// mp_frontend: multi-path (disjoint-eager) instruction fetch and rename-pointer
// front end with a variable fetch rate.
//
// Instead of betting on one direction of each hard-to-predict conditional
// branch, the front end follows both directions as separate thread paths
// and divides the fetch width among the live paths according to how likely
// each path is to be the right one. Blocks and their connections:
//
//   thread_mgmt_table  next PC, forked branch address, level and path
//                      confidence of every live path; forks and kills paths
//   branch_history     global history of resolved branch outcomes
//   conf_hash (x2)     forked branch address XOR history -> table index,
//                      one for the fork lookup, one for the update
//   path_conf_table    4-bit confidence counters of the branches
//   cum_prob           splits a forking path's confidence between children
//   gshare             direction used when a path is at MAX_LEVEL, and the
//                      "predicted" direction against which confidence counts
//   eager_scheduler    selective or dynamic (variable-rate) fetch allocation
//   collapsing_buffer  packs the fetched runs into one FW-slot fetch group
//   rename_ptr_logic   finds the rename pointer of a register along a
//                      path's ancestors (flow chart walk)
//
// Cycle t: the scheduler ranks the live paths by confidence and gives each
// a count; ic_pc[p] asks the instruction cache (outside, perfect memory) for
// the FW instructions at the path's next PC and ic_line[p] returns them in
// the same cycle; the table's next PCs advance on the edge and the packed
// group appears on dec_* in cycle t+1.
// A conditional branch found by the BTB/pre-decode (outside) is reported on
// fk_*: the path forks in that edge, or follows gshare if at MAX_LEVEL. The
// back end returns each executed branch on br_*, with the fork level and the
// prediction it was given (fork_pred), and this kills the wrong subtree,
// trains the confidence table, gshare and the history. Rename writes and
// lookups come from the rename stage on rn_* / lk_*.
module mp_frontend #(
  parameter int unsigned ID_W        = 20,
  parameter int unsigned FW          = 32,
  parameter int unsigned TW          = 8,
  parameter int unsigned PORTS       = 4,
  parameter int unsigned PC_W        = 32,
  parameter int unsigned INSN_W      = 32,
  parameter int unsigned CONF_W      = 16,
  parameter int unsigned CW          = 4,
  parameter int unsigned PCT_ENTRIES = 8132,
  parameter int unsigned GS_ENTRIES  = 16384,
  parameter int unsigned HIST_W      = 16,
  parameter int unsigned AREGS       = 32,
  parameter int unsigned PTR_W       = 12,
  parameter int unsigned MAX_LEVEL   = ID_W,
  parameter int unsigned N           = 1 << ID_W,
  parameter int unsigned LV_W        = $clog2(MAX_LEVEL + 2),
  parameter int unsigned CNT_W       = $clog2(FW + 1),
  parameter int unsigned AR_W        = $clog2(AREGS)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [PC_W-1:0]       start_pc,
  input  mp_pkg::fetch_policy_e policy,
  // instruction cache ports (perfect memory outside this block)
  output logic [PORTS-1:0]      ic_req,
  output logic [PC_W-1:0]       ic_pc   [PORTS],
  input  logic [INSN_W-1:0]     ic_line [PORTS][FW],
  // fetch group to decode
  output logic [FW-1:0]         dec_valid,
  output logic [INSN_W-1:0]     dec_insn [FW],
  output logic [PC_W-1:0]       dec_pc   [FW],
  output logic [ID_W-1:0]       dec_tid  [FW],
  // conditional branch found on path fk_id (from BTB / pre-decode)
  input  logic                  fk_valid,
  input  logic [ID_W-1:0]       fk_id,
  input  logic [PC_W-1:0]       fk_br_pc,
  input  logic [PC_W-1:0]       fk_taken_pc,
  input  logic [PC_W-1:0]       fk_nt_pc,
  output logic                  fork_forked,     // both directions followed
  output logic                  fork_predicted,  // at MAX_LEVEL: gshare followed
  output logic                  fork_pred,       // gshare direction for this branch
  output logic [LV_W-1:0]       fork_level,      // level the branch was met at
  // executed branch from the back end
  input  logic                  br_valid,
  input  logic                  br_forked,       // it was forked (else predicted)
  input  logic [ID_W-1:0]       br_id,           // path that met the branch
  input  logic [LV_W-1:0]       br_level,        // fork_level given at fetch
  input  logic [PC_W-1:0]       br_pc,
  input  logic                  br_taken,
  input  logic                  br_pred,         // fork_pred given at fetch
  input  logic [PC_W-1:0]       br_target,       // correct next PC
  // thread table state
  output logic [N-1:0]          live,
  output logic [N-1:0]          killed,
  input  logic                  rebase_allow,
  output logic                  rebase_fire,
  // rename stage
  input  logic                  rn_valid,
  input  logic [ID_W-1:0]       rn_tid,
  input  logic [LV_W-1:0]       rn_level,
  input  logic [AR_W-1:0]       rn_areg,
  input  logic [PTR_W-1:0]      rn_ptr,
  input  logic                  lk_valid,
  output logic                  lk_ready,
  input  logic [ID_W-1:0]       lk_tid,
  input  logic [LV_W-1:0]       lk_level,
  input  logic [AR_W-1:0]       lk_areg,
  output logic                  lk_res_valid,
  output logic [PTR_W-1:0]      lk_res_ptr,
  output logic                  lk_res_arch,
  output logic [LV_W-1:0]       lk_res_steps
);
  localparam int unsigned PIDX_W = $clog2(PCT_ENTRIES);

  // ---- history, predictor, confidence ----
  logic [HIST_W-1:0] hist;
  logic [PIDX_W-1:0] fk_idx, br_idx;
  logic [CW-1:0]     fk_ctr, br_old_ctr;
  logic              gs_taken;

  branch_history #(.HIST_W(HIST_W)) u_hist (
    .clk, .rst_n, .upd_valid(br_valid), .upd_taken(br_taken), .hist);

  gshare #(.ENTRIES(GS_ENTRIES), .HIST_W(HIST_W), .PC_W(PC_W)) u_gshare (
    .clk, .rst_n, .hist, .lk_pc(fk_br_pc), .lk_taken(gs_taken),
    .upd_valid(br_valid), .upd_pc(br_pc), .upd_taken(br_taken));

  conf_hash #(.PC_W(PC_W), .HIST_W(HIST_W), .ENTRIES(PCT_ENTRIES)) u_hash_fk (
    .br_addr(fk_br_pc), .hist, .idx(fk_idx));
  conf_hash #(.PC_W(PC_W), .HIST_W(HIST_W), .ENTRIES(PCT_ENTRIES)) u_hash_br (
    .br_addr(br_pc), .hist, .idx(br_idx));

  path_conf_table #(.ENTRIES(PCT_ENTRIES), .CW(CW)) u_pct (
    .clk, .rst_n, .rd_idx(fk_idx), .rd_conf(fk_ctr),
    .upd_valid(br_valid), .upd_idx(br_idx), .upd_correct(br_taken == br_pred),
    .upd_old(br_old_ctr));

  // ---- thread management table ----
  logic [PC_W-1:0]   ent_pc        [N];
  logic [PC_W-1:0]   ent_fork_addr [N];
  logic [LV_W-1:0]   ent_level     [N];
  logic [CONF_W-1:0] ent_conf      [N];
  logic [ID_W-1:0]   ent_parent_id [N];
  logic [LV_W-1:0]   ent_parent_lv [N];
  logic [CONF_W-1:0] parent_conf, pred_conf, alt_conf;
  logic [LV_W-1:0]   parent_lv;
  logic [ID_W-1:0]   child_id;
  logic              at_max, fork_done;
  logic [ID_W-1:0]   rebase_from;
  logic [$clog2(N+1)-1:0] live_count;

  logic [PORTS-1:0]  sel_valid;
  logic [ID_W-1:0]   sel_id    [PORTS];
  logic [CNT_W-1:0]  sel_count [PORTS];

  logic br_kill, br_redirect;
  assign br_kill     = br_valid && br_forked;
  assign br_redirect = br_valid && !br_forked && (br_taken != br_pred);

  cum_prob #(.CONF_W(CONF_W), .CW(CW)) u_cum (
    .parent_conf, .ctr(fk_ctr), .pred_conf, .alt_conf);

  thread_mgmt_table #(.ID_W(ID_W), .PC_W(PC_W), .CONF_W(CONF_W), .PORTS(PORTS),
                      .FW(FW), .MAX_LEVEL(MAX_LEVEL)) u_tmt (
    .clk, .rst_n, .start_pc,
    .ent_valid(live), .ent_pc, .ent_fork_addr, .ent_level, .ent_conf,
    .ent_parent_id, .ent_parent_lv,
    .fork_valid(fk_valid), .fork_id(fk_id), .fork_br_pc(fk_br_pc),
    .fork_taken_pc(fk_taken_pc), .fork_nt_pc(fk_nt_pc),
    .fork_pred_taken(gs_taken), .fork_pred_conf(pred_conf), .fork_alt_conf(alt_conf),
    .fork_parent_conf(parent_conf), .fork_parent_lv(parent_lv),
    .fork_child_id(child_id), .fork_at_max(at_max), .fork_done,
    .redir_valid(br_redirect), .redir_id(br_id), .redir_pc(br_target),
    .adv_valid(sel_valid), .adv_id(sel_id), .adv_count(sel_count),
    .res_valid(br_kill), .res_id(br_id), .res_level(br_level), .res_taken(br_taken),
    .kill(killed),
    .rebase_allow, .rebase_fire, .rebase_from, .live_count);

  assign fork_forked    = fork_done;
  assign fork_predicted = at_max;
  assign fork_pred      = gs_taken;
  assign fork_level     = parent_lv;

  // ---- fetch ----
  eager_scheduler #(.ID_W(ID_W), .CONF_W(CONF_W), .FW(FW), .TW(TW), .PORTS(PORTS)) u_sched (
    .policy, .valid(live), .conf(ent_conf), .sel_valid, .sel_id, .sel_count);

  always_comb
    for (int unsigned p = 0; p < PORTS; p++) ic_pc[p] = ent_pc[sel_id[p]];
  assign ic_req = sel_valid;

  collapsing_buffer #(.FW(FW), .PORTS(PORTS), .ID_W(ID_W), .PC_W(PC_W), .INSN_W(INSN_W)) u_cbuf (
    .clk, .rst_n, .in_valid(sel_valid), .in_id(sel_id), .in_pc(ic_pc),
    .in_count(sel_count), .in_line(ic_line),
    .dec_valid, .dec_insn, .dec_pc, .dec_tid);

  // ---- rename pointers ----
  rename_ptr_logic #(.ID_W(ID_W), .MAX_LEVEL(MAX_LEVEL), .AREGS(AREGS), .PTR_W(PTR_W)) u_ren (
    .clk, .rst_n,
    .fk_valid(fork_done), .fk_child(child_id), .fk_parent(fk_id), .fk_level(parent_lv),
    .kill(killed), .kill_level(br_level), .rebase(rebase_fire),
    .wr_valid(rn_valid), .wr_tid(rn_tid), .wr_level(rn_level), .wr_areg(rn_areg), .wr_ptr(rn_ptr),
    .lk_valid, .lk_ready, .lk_tid, .lk_level, .lk_areg,
    .res_valid(lk_res_valid), .res_ptr(lk_res_ptr), .res_arch(lk_res_arch),
    .res_steps(lk_res_steps));
endmodule
