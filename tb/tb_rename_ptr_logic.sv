// tb_rename_ptr_logic: the register-12 example of multi-path renaming.
// The master writes R12 -> 54 at level 0; path 00 forks at level 0 (taken
// child 01) and writes R12 -> 36 at level 1; it forks again at level 1
// (taken child 10) and writes R12 -> 72 at level 2. Then path 10 must read
// 36, path 01 must read 54 and path 00 must read 72. Kills, rebase, the walk
// length and a random ancestry test with a reference walk are also checked.
module tb_rename_ptr_logic;
  localparam int ID_W = 2, N = 4, ML = 2;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic fk_valid = 0, rebase = 0, wr_valid = 0, lk_valid = 0;
  logic [ID_W-1:0] fk_child = 0, fk_parent = 0, wr_tid = 0, lk_tid = 0;
  logic [2:0] fk_level = 0, kill_level = 0, wr_level = 0, lk_level = 0, res_steps;
  logic [N-1:0] kill = 0;
  logic [4:0] wr_areg = 0, lk_areg = 0;
  logic [11:0] wr_ptr = 0, res_ptr;
  logic lk_ready, res_valid, res_arch;

  rename_ptr_logic #(.ID_W(ID_W), .MAX_LEVEL(ML), .AREGS(32), .PTR_W(12)) dut (.*);

  always #5 clk = ~clk;

  task automatic fork_ev(input int child, input int parent, input int lv);
    @(negedge clk);
    fk_valid = 1; fk_child = ID_W'(child); fk_parent = ID_W'(parent); fk_level = 3'(lv);
    @(posedge clk); #1;
    fk_valid = 0;
  endtask

  task automatic wr(input int tid, input int lv, input int areg, input int ptr);
    @(negedge clk);
    wr_valid = 1; wr_tid = ID_W'(tid); wr_level = 3'(lv); wr_areg = 5'(areg); wr_ptr = 12'(ptr);
    @(posedge clk); #1;
    wr_valid = 0;
  endtask

  task automatic look(input int tid, input int lv, input int areg, input int exp_ptr,
                      input bit exp_arch, input int max_cycles, input string what);
    int cyc;
    @(negedge clk);
    checks++;
    if (!lk_ready) begin failures++; $display("FAIL %s: not ready", what); end
    lk_valid = 1; lk_tid = ID_W'(tid); lk_level = 3'(lv); lk_areg = 5'(areg);
    @(posedge clk); #1;
    lk_valid = 0;
    cyc = 0;
    while (!res_valid && cyc < 20) begin @(posedge clk); #1; cyc++; end
    checks++;
    if (!res_valid || int'(res_ptr) != exp_ptr || res_arch != exp_arch || cyc > max_cycles) begin
      failures++;
      $display("FAIL %s: ptr=%0d exp=%0d arch=%0d cycles=%0d", what, res_ptr, exp_ptr, res_arch, cyc + 1);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    // architectural file starts as the identity map
    look(0, 0, 5, 5, 1, 1, "reset identity");
    wr(0, 0, 12, 54);              // master, level 0
    fork_ev(1, 0, 0);              // 00 forks at level 0: taken child 01
    wr(0, 1, 12, 36);              // 00 at level 1
    fork_ev(2, 0, 1);              // 00 forks at level 1: taken child 10
    wr(0, 2, 12, 72);              // 00 at level 2
    look(2, 2, 12, 36, 0, 2, "path 10 reads R36");
    look(1, 1, 12, 54, 1, ML, "path 01 reads R54");
    look(0, 2, 12, 72, 0, 1, "path 00 reads R72");
    look(0, 1, 12, 36, 0, 1, "path 00 at level 1 reads R36");
    look(2, 2, 7, 7, 1, ML, "unrenamed register from architectural file");
    checks++;
    if (res_steps != 3'(ML)) begin failures++; $display("FAIL walk length %0d", res_steps); end
    // branch of level 1 resolves taken: path 00 dies above level 1
    @(negedge clk);
    kill = 4'b0001; kill_level = 1;
    @(posedge clk); #1;
    kill = 0;
    look(2, 2, 12, 36, 0, 2, "ancestor pointer kept after kill");
    look(0, 2, 12, 36, 0, 2, "killed level-2 pointer gone");
    // rebase clears all per-path pointers
    @(negedge clk);
    rebase = 1;
    @(posedge clk); #1;
    rebase = 0;
    look(2, 2, 12, 54, 1, ML, "after rebase: architectural file");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
