// tb_mp_frontend: end-to-end test of the multi-path front end at its
// largest size simulated: 2**16 thread IDs and 16 branch levels (the RTL
// default is 20), with the default 32-wide fetch and 4 ports.
//
// The instruction cache is modelled here as perfect memory whose word at
// byte address a is icache_word(a). Every cycle the fetch group is checked:
// each valid slot holds the word of its PC, a path's slots have consecutive
// PCs, only live paths fetch, and the group size is FW (dynamic policy) or
// 8 per path for at most four paths (selective policy). The scenario:
//   1. the master fetches alone; its PC advances by FW instructions a cycle;
//   2. it forks twice and renames register 12 as in the paper's example;
//      the three lookups must give the pointers 36, 54 and 72;
//   3. with the counters at their reset value the first fork splits the
//      width 24 / 8 (confidences 0.75 / 0.25);
//   4. path 0 forks down to the maximum level, where gshare is followed;
//   5. branches resolve: wrong subtrees are killed, a wrong prediction
//      redirects, the confidence table trains both ways;
//   6. the selective policy runs on several paths; one path is left and
//      rebased to the master.
// Each mechanism is counted and one that never happened counts a failure.
module tb_mp_frontend;
  import mp_pkg::*;
  localparam int ID_W = 16, N = 1 << ID_W, ML = ID_W, FW = 32, P = 4, LV_W = 5;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  logic [31:0] start_pc = 32'h0001_0000;
  fetch_policy_e policy = POL_DYNAMIC;
  logic [P-1:0] ic_req;
  logic [31:0] ic_pc [P];
  logic [31:0] ic_line [P][FW];
  logic [FW-1:0] dec_valid;
  logic [31:0] dec_insn [FW], dec_pc [FW];
  logic [ID_W-1:0] dec_tid [FW];
  logic fk_valid = 0;
  logic [ID_W-1:0] fk_id = 0;
  logic [31:0] fk_br_pc = 0, fk_taken_pc = 0, fk_nt_pc = 0;
  logic fork_forked, fork_predicted, fork_pred;
  logic [LV_W-1:0] fork_level;
  logic br_valid = 0, br_forked = 0, br_taken = 0, br_pred = 0;
  logic [ID_W-1:0] br_id = 0;
  logic [LV_W-1:0] br_level = 0;
  logic [31:0] br_pc = 0, br_target = 0;
  logic [N-1:0] live, killed;
  logic rebase_allow = 0, rebase_fire;
  logic rn_valid = 0, lk_valid = 0;
  logic [ID_W-1:0] rn_tid = 0, lk_tid = 0;
  logic [LV_W-1:0] rn_level = 0, lk_level = 0, lk_res_steps;
  logic [4:0] rn_areg = 0, lk_areg = 0;
  logic [11:0] rn_ptr = 0, lk_res_ptr;
  logic lk_ready, lk_res_valid, lk_res_arch;

  mp_frontend #(.ID_W(ID_W)) dut (.*);

  always #5 clk = ~clk;

  function automatic logic [31:0] icache_word(input logic [31:0] a);
    return (a * 32'h9E37_79B1) ^ 32'h5A5A_0F0F;
  endfunction

  always_comb
    for (int p = 0; p < P; p++)
      for (int k = 0; k < FW; k++) ic_line[p][k] = icache_word(ic_pc[p] + 32'(4 * k));

  // mechanism counters
  int n_fork, n_pred_at_max, n_kill, n_redirect, n_rebase, n_dyn_split, n_sel_split;
  int n_ren_own, n_ren_walk, n_ren_arch, n_conf_ok, n_conf_bad;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  // ---- per-cycle check of the fetch group against the state one cycle earlier ----
  logic [N-1:0] live_prev;
  fetch_policy_e pol_prev;
  logic started = 0;
  int last_share [N];
  int per_tid [N];
  int total, nlive, ntid;
  always @(posedge clk) begin
    if (started) begin
      for (int j = 0; j < N; j++) per_tid[j] = 0;
      total = 0;
      for (int s = 0; s < FW; s++)
        if (dec_valid[s]) begin
          total++;
          per_tid[dec_tid[s]]++;
          if (dec_insn[s] != icache_word(dec_pc[s])) begin
            failures++; $display("FAIL slot %0d insn/pc mismatch", s);
          end
          if (!live_prev[dec_tid[s]]) begin
            failures++; $display("FAIL slot %0d from dead path %0d", s, dec_tid[s]);
          end
          if (s > 0 && dec_valid[s-1] && dec_tid[s-1] == dec_tid[s] &&
              dec_pc[s] != dec_pc[s-1] + 4) begin
            failures++; $display("FAIL slot %0d PC not consecutive", s);
          end
        end
      nlive = 0;
      for (int j = 0; j < N; j++) if (live_prev[j]) nlive++;
      ntid = 0;
      for (int j = 0; j < N; j++) if (per_tid[j] != 0) ntid++;
      checks++;
      if (pol_prev == POL_DYNAMIC) begin
        if (total != FW) begin failures++; $display("FAIL dynamic group size %0d", total); end
        if (ntid >= 2) n_dyn_split++;
      end else begin
        if (total != 8 * ((nlive < 4) ? nlive : 4)) begin
          failures++; $display("FAIL selective group size %0d for %0d paths", total, nlive);
        end
        for (int j = 0; j < N; j++)
          if (per_tid[j] != 0 && per_tid[j] != 8) begin
            failures++; $display("FAIL selective share %0d", per_tid[j]);
          end
        if (ntid >= 2) n_sel_split++;
      end
      for (int j = 0; j < N; j++) last_share[j] = per_tid[j];
    end
    live_prev <= live;
    pol_prev  <= policy;
    started   <= rst_n;
  end

  always @(posedge clk) if (rst_n && killed != '0) n_kill++;
  always @(posedge clk) if (rst_n && rebase_fire) n_rebase++;
  always @(posedge clk) if (rst_n && br_valid) begin
    if (br_taken == br_pred) n_conf_ok++; else n_conf_bad++;
    if (!br_forked && br_taken != br_pred) n_redirect++;
  end

  // ---- stimulus helpers ----
  typedef struct { int id; int lv; bit pred; int br; int tgt; int nt; bit forked; } fork_rec_t;
  fork_rec_t recs [$];

  task automatic do_fork(input int id, input int br, output fork_rec_t r);
    @(negedge clk);
    fk_valid = 1; fk_id = ID_W'(id); fk_br_pc = 32'(br);
    fk_taken_pc = 32'(br) + 32'h400; fk_nt_pc = 32'(br) + 4;
    #1;
    r.id = id; r.lv = int'(fork_level); r.pred = fork_pred; r.br = br;
    r.tgt = br + 'h400; r.nt = br + 4; r.forked = fork_forked;
    if (fork_forked) n_fork++;
    if (fork_predicted) n_pred_at_max++;
    @(posedge clk); #1;
    fk_valid = 0;
  endtask

  task automatic do_resolve(input fork_rec_t r, input bit taken);
    @(negedge clk);
    br_valid = 1; br_forked = r.forked; br_id = ID_W'(r.id); br_level = LV_W'(r.lv);
    br_pc = 32'(r.br); br_taken = taken; br_pred = r.pred;
    br_target = taken ? 32'(r.tgt) : 32'(r.nt);
    @(posedge clk); #1;
    br_valid = 0;
  endtask

  task automatic rename(input int tid, input int lv, input int areg, input int ptr);
    @(negedge clk);
    rn_valid = 1; rn_tid = ID_W'(tid); rn_level = LV_W'(lv); rn_areg = 5'(areg); rn_ptr = 12'(ptr);
    @(posedge clk); #1;
    rn_valid = 0;
  endtask

  task automatic lookup(input int tid, input int lv, input int areg, input int exp, input string what);
    int cyc;
    @(negedge clk);
    while (!lk_ready) @(negedge clk);
    lk_valid = 1; lk_tid = ID_W'(tid); lk_level = LV_W'(lv); lk_areg = 5'(areg);
    @(posedge clk); #1;
    lk_valid = 0;
    cyc = 0;
    while (!lk_res_valid && cyc < ML + 10) begin @(posedge clk); #1; cyc++; end
    chk(lk_res_valid && int'(lk_res_ptr) == exp && cyc <= ML, what);
    if (lk_res_arch) n_ren_arch++;
    else if (lk_res_steps != 0) n_ren_walk++;
    else n_ren_own++;
  endtask

  // ---- watchdog ----
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fork_rec_t r0, r1, r, deep [$];
    int pc_before;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // 1. master alone
    repeat (4) @(posedge clk);
    #1;
    pc_before = int'(ic_pc[0]);
    @(posedge clk); #1;
    chk(ic_pc[0] == 32'(pc_before) + 32'(FW * 4) && live == N'(1), "master advances FW instructions");
    // 2./3. first fork: reset counters give 0.75 / 0.25 -> 24 / 8
    do_fork(0, 'h1_0100, r0);
    chk(r0.forked && r0.lv == 0 && live == N'(3), "first fork creates path 1");
    repeat (2) @(posedge clk);
    #1;
    chk((last_share[0] == 24 && last_share[1] == 8) || (last_share[0] == 8 && last_share[1] == 24),
        "24/8 split of the first fork");
    chk(last_share[r0.pred ? 1 : 0] == 24, "predicted child gets the larger share");
    rename(0, 0, 12, 54);
    rename(0, 1, 12, 36);
    do_fork(0, 'h1_0200, r1);
    chk(r1.forked && r1.lv == 1 && live[2], "second fork creates path 2");
    rename(0, 2, 12, 72);
    lookup(2, 2, 12, 36, "path 10 reads R36 via its parent");
    lookup(1, 1, 12, 54, "path 01 reads R54 from the architectural file");
    lookup(0, 2, 12, 72, "path 00 reads its own R72");
    // 4. path 0 forks down to the maximum level
    for (int k = 0; k < ML - 1; k++) begin
      do_fork(0, 'h2_0000 + 'h100 * k, r);
      deep.push_back(r);
      repeat (2) @(posedge clk);
    end
    chk(deep[ML-3].forked && !deep[ML-2].forked, "no fork beyond the maximum level");
    chk(n_pred_at_max > 0, "gshare followed at the maximum level");
    // 5. a predicted branch at the maximum level went the other way: redirect
    do_resolve(deep[ML-2], !deep[ML-2].pred);
    @(posedge clk); #1;
    // resolve the deep forks of path 0 the not-taken way from the deepest up
    for (int k = ML - 3; k >= 0; k--) begin
      do_resolve(deep[k], 1'b0);
      chk(!live[r0.id | (1 << (k + 2))], "taken child killed");
    end
    chk(live == N'(7), "three paths left after the deep resolves");
    // 6. selective policy on three paths, then on more
    policy = POL_SELECTIVE;
    repeat (3) @(posedge clk);
    do_fork(1, 'h3_0000, r);
    do_fork(2, 'h3_1000, r);
    repeat (4) @(posedge clk);
    policy = POL_DYNAMIC;
    repeat (3) @(posedge clk);
    // level-0 branch resolves taken: paths 0, 2 and 6 die, 1 and 3 stay
    do_resolve(r0, 1'b1);
    #1;
    chk(!live[0] && !live[2] && live[1], "level-0 resolve kills the not-taken side");
    // resolve the fork of path 1 at level 1, then only one path remains
    begin
      fork_rec_t rr;
      rr.id = 1; rr.lv = 1; rr.pred = 0; rr.br = 'h3_0000; rr.tgt = 'h3_0400; rr.nt = 'h3_0004; rr.forked = 1;
      do_resolve(rr, 1'b0);
    end
    chk(live == N'(2), "one path left");
    @(negedge clk);
    rebase_allow = 1;
    @(posedge clk); #1;
    rebase_allow = 0;
    chk(live == N'(1), "survivor rebased to the master thread");
    lookup(0, 0, 12, 54, "after rebase the master reads the architectural file");
    repeat (4) @(posedge clk);
    // counts of each mechanism
    chk(n_fork > 0, "fork happened");
    chk(n_pred_at_max > 0, "prediction at maximum level happened");
    chk(n_kill > 0, "kill happened");
    chk(n_redirect > 0, "redirect happened");
    chk(n_rebase > 0, "rebase happened");
    chk(n_dyn_split > 0, "dynamic split happened");
    chk(n_sel_split > 0, "selective split happened");
    chk(n_ren_own > 0, "rename hit in own path happened");
    chk(n_ren_walk > 0, "rename walk to an ancestor happened");
    chk(n_ren_arch > 0, "rename from architectural file happened");
    chk(n_conf_ok > 0 && n_conf_bad > 0, "confidence trained both ways");
    $display("mechanisms: fork=%0d pred_at_max=%0d kill=%0d redirect=%0d rebase=%0d dyn=%0d sel=%0d own=%0d walk=%0d arch=%0d ok=%0d bad=%0d",
             n_fork, n_pred_at_max, n_kill, n_redirect, n_rebase, n_dyn_split, n_sel_split,
             n_ren_own, n_ren_walk, n_ren_arch, n_conf_ok, n_conf_bad);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
