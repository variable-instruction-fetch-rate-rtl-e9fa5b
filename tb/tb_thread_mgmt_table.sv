// tb_thread_mgmt_table: forks, PC advance, kills, prediction at the maximum
// level, redirect and rebase on a table of 2**3 paths with MAX_LEVEL 3.
// Expected IDs, levels, PCs and confidences are written out by hand from
// the ID rule (taken child = ID | 1 << level).
module tb_thread_mgmt_table;
  localparam int ID_W = 3, N = 8, P = 4;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic [31:0] start_pc = 32'h1000;
  logic [N-1:0] ent_valid, kill;
  logic [31:0] ent_pc [N], ent_fork_addr [N];
  logic [2:0]  ent_level [N], ent_parent_lv [N];
  logic [15:0] ent_conf [N];
  logic [2:0]  ent_parent_id [N];
  logic fork_valid = 0, fork_pred_taken = 0;
  logic [2:0] fork_id = 0;
  logic [31:0] fork_br_pc = 0, fork_taken_pc = 0, fork_nt_pc = 0;
  logic [15:0] fork_pred_conf = 0, fork_alt_conf = 0, fork_parent_conf;
  logic [2:0] fork_parent_lv, fork_child_id;
  logic fork_at_max, fork_done;
  logic redir_valid = 0;
  logic [2:0] redir_id = 0;
  logic [31:0] redir_pc = 0;
  logic [P-1:0] adv_valid = 0;
  logic [2:0] adv_id [P];
  logic [5:0] adv_count [P];
  logic res_valid = 0, res_taken = 0;
  logic [2:0] res_id = 0, res_level = 0;
  logic rebase_allow = 0, rebase_fire;
  logic [2:0] rebase_from;
  logic [3:0] live_count;

  thread_mgmt_table #(.ID_W(ID_W), .PC_W(32), .CONF_W(16), .PORTS(P), .FW(32)) dut (.*);

  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic do_fork(input int id, input int br, input int tpc, input int npc,
                         input bit pt, input int pc_, input int ac);
    @(negedge clk);
    fork_valid = 1; fork_id = 3'(id); fork_br_pc = 32'(br); fork_taken_pc = 32'(tpc);
    fork_nt_pc = 32'(npc); fork_pred_taken = pt; fork_pred_conf = 16'(pc_); fork_alt_conf = 16'(ac);
    @(posedge clk); #1;
    fork_valid = 0;
  endtask

  task automatic do_res(input int id, input int lv, input bit tk);
    @(negedge clk);
    res_valid = 1; res_id = 3'(id); res_level = 3'(lv); res_taken = tk;
    @(posedge clk); #1;
    res_valid = 0;
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int p = 0; p < P; p++) begin adv_id[p] = '0; adv_count[p] = '0; end
    repeat (2) @(posedge clk);
    rst_n = 1; #1;
    chk(ent_valid == 8'b0000_0001 && ent_pc[0] == 32'h1000 && ent_level[0] == 0 &&
        ent_conf[0] == 16'hffff && live_count == 1, "reset state");
    // advance master by 32 instructions
    @(negedge clk);
    adv_valid = 4'b0001; adv_id[0] = 0; adv_count[0] = 6'd32;
    @(posedge clk); #1;
    adv_valid = 0;
    chk(ent_pc[0] == 32'h1080, "PC advance by 32 instructions");
    // fork master at level 0: predicted taken with 0.75 / 0.25
    @(negedge clk);
    chk(fork_parent_conf == 16'hffff && fork_parent_lv == 0, "fork parent readout");
    do_fork(0, 'h1040, 'h2000, 'h1044, 1, 49151, 16383);
    chk(ent_valid == 8'b0000_0011, "fork at level 0 creates ID 1");
    chk(ent_pc[0] == 32'h1044 && ent_pc[1] == 32'h2000, "child PCs");
    chk(ent_level[0] == 1 && ent_level[1] == 1, "child levels");
    chk(ent_conf[1] == 16'd49151 && ent_conf[0] == 16'd16383, "child confidences (taken predicted)");
    chk(ent_fork_addr[0] == 32'h1040 && ent_fork_addr[1] == 32'h1040, "forked branch address");
    chk(ent_parent_id[1] == 0 && ent_parent_lv[1] == 0, "parent of ID 1");
    // fork ID 0 at level 1 -> ID 2; fork ID 1 at level 1 -> ID 3
    do_fork(0, 'h1050, 'h3000, 'h1054, 0, 12000, 4000);
    do_fork(1, 'h2010, 'h4000, 'h2014, 1, 30000, 10000);
    chk(ent_valid == 8'b0000_1111, "four paths at level 2");
    chk(ent_conf[0] == 16'd12000 && ent_conf[2] == 16'd4000, "not-taken predicted confidences");
    chk(ent_parent_id[2] == 0 && ent_parent_lv[2] == 1 && ent_parent_id[3] == 1, "parents of 2 and 3");
    // simultaneous PC advance of two ports
    @(negedge clk);
    adv_valid = 4'b0011; adv_id[0] = 3; adv_count[0] = 6'd10; adv_id[1] = 2; adv_count[1] = 6'd3;
    @(posedge clk); #1;
    adv_valid = 0;
    chk(ent_pc[3] == 32'h4028 && ent_pc[2] == 32'h300c, "two-port PC advance");
    // fork ID 3 at level 2 -> ID 7 at level 3 (= MAX_LEVEL)
    do_fork(3, 'h4030, 'h5000, 'h4034, 0, 100, 50);
    chk(ent_valid == 8'b1000_1111 && ent_level[7] == 3, "fork to the maximum level");
    // a branch met at the maximum level follows the prediction, no fork
    @(negedge clk);
    fork_valid = 1; fork_id = 7; fork_br_pc = 'h5010; fork_taken_pc = 'h6000;
    fork_nt_pc = 'h5014; fork_pred_taken = 1;
    #1;
    chk(fork_at_max && !fork_done, "no fork at maximum level");
    @(posedge clk); #1;
    fork_valid = 0;
    chk(ent_valid == 8'b1000_1111 && ent_pc[7] == 32'h6000, "predicted direction followed");
    // redirect after a wrong prediction
    @(negedge clk);
    redir_valid = 1; redir_id = 7; redir_pc = 'h5014;
    @(posedge clk); #1;
    redir_valid = 0;
    chk(ent_pc[7] == 32'h5014, "redirect");
    // level-0 branch resolves taken: IDs 0 and 2 (bit 0 = 0) die
    @(negedge clk);
    res_valid = 1; res_id = 0; res_level = 0; res_taken = 1;
    #1;
    chk(kill == 8'b0000_0101, "kill mask of level-0 branch");
    @(posedge clk); #1;
    res_valid = 0;
    chk(ent_valid == 8'b1000_1010, "wrong subtree removed");
    // level-1 branch of path 1 resolves not taken: ID 3 and its child 7 die
    do_res(1, 1, 0);
    chk(ent_valid == 8'b0000_0010 && live_count == 1, "second kill");
    // rebase only when allowed
    @(negedge clk); #1;
    chk(!rebase_fire, "no rebase without permission");
    rebase_allow = 1; #1;
    chk(rebase_fire && rebase_from == 1, "rebase condition");
    @(posedge clk); #1;
    rebase_allow = 0;
    chk(ent_valid == 8'b0000_0001 && ent_level[0] == 0 && ent_pc[0] == 32'h2014 &&
        ent_conf[0] == 16'hffff, "rebased to master");
    // the rebased master can fork again from level 0
    do_fork(0, 'h2000, 'h7000, 'h2004, 0, 40000, 20000);
    chk(ent_valid == 8'b0000_0011 && ent_pc[1] == 32'h7000 && ent_level[1] == 1, "fork after rebase");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
