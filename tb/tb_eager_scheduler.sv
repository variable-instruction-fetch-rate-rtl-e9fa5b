// tb_eager_scheduler: fetch allocation of both policies.
// Directed: confidences 0.8 / 0.2 under the dynamic policy give 26 and 6 of
// 32; five live paths under the selective policy give 8 instructions to
// each of the four most confident. Random: live masks and confidences
// against a reference that sorts the paths and divides the width itself.
module tb_eager_scheduler;
  import mp_pkg::*;
  localparam int ID_W = 4, N = 16, FW = 32, TW = 8, P = 4;
  int checks = 0, failures = 0;
  fetch_policy_e policy;
  logic [N-1:0]  valid;
  logic [15:0]   conf [N];
  logic [P-1:0]  sel_valid;
  logic [ID_W-1:0] sel_id [P];
  logic [5:0]    sel_count [P];

  eager_scheduler #(.ID_W(ID_W), .CONF_W(16), .FW(FW), .TW(TW), .PORTS(P)) dut (
    .policy, .valid, .conf, .sel_valid, .sel_id, .sel_count);

  // reference: expected count for every ID (0 if it does not fetch)
  task automatic reference(output int cnt [N]);
    int order [P];
    int nr, sum, tot;
    bit used [N];
    for (int j = 0; j < N; j++) begin cnt[j] = 0; used[j] = 0; end
    nr = 0;
    for (int r = 0; r < P; r++) begin
      int best = -1;
      for (int j = 0; j < N; j++)
        if (valid[j] && !used[j] && (best < 0 || conf[j] > conf[best])) best = j;
      if (best >= 0) begin order[nr] = best; used[best] = 1; nr++; end
    end
    if (nr == 0) return;
    if (policy == POL_SELECTIVE) begin
      for (int r = 0; r < nr && r < FW / TW; r++) cnt[order[r]] = TW;
      return;
    end
    sum = 0;
    for (int r = 0; r < nr; r++) sum += int'(conf[order[r]]);
    tot = 0;
    for (int r = 0; r < nr; r++) begin
      if (sum != 0) cnt[order[r]] = (FW * int'(conf[order[r]]) + sum / 2) / sum;
      else          cnt[order[r]] = FW / nr;
      tot += cnt[order[r]];
    end
    cnt[order[0]] += FW - tot;
  endtask

  task automatic compare(input string what);
    int exp [N];
    int got [N];
    #1;
    reference(exp);
    for (int j = 0; j < N; j++) got[j] = 0;
    for (int p = 0; p < P; p++)
      if (sel_valid[p]) got[sel_id[p]] += int'(sel_count[p]);
    for (int j = 0; j < N; j++) begin
      checks++;
      if (got[j] != exp[j]) begin
        failures++;
        $display("FAIL %s id=%0d got=%0d exp=%0d", what, j, got[j], exp[j]);
      end
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int j = 0; j < N; j++) conf[j] = '0;
    // paper's example: 0.8 and 0.2 of a 32-wide fetch
    policy = POL_DYNAMIC;
    valid = '0; valid[3] = 1; valid[9] = 1;
    conf[3] = 16'd52429; conf[9] = 16'd13107;
    #1;
    checks++;
    if (!(sel_valid[0] && sel_id[0] == 3 && sel_count[0] == 26 &&
          sel_valid[1] && sel_id[1] == 9 && sel_count[1] == 6 && sel_valid[3:2] == 2'b00)) begin
      failures++;
      $display("FAIL 0.8/0.2 example: %0d:%0d %0d:%0d", sel_id[0], sel_count[0], sel_id[1], sel_count[1]);
    end
    // selective: five live paths, the four best get 8 each
    policy = POL_SELECTIVE;
    valid = '0;
    for (int j = 0; j < 5; j++) begin valid[j*3] = 1; conf[j*3] = 16'(1000 * (j + 1)); end
    #1;
    checks++;
    if (!(sel_valid == 4'hf && sel_id[0] == 12 && sel_id[1] == 9 && sel_id[2] == 6 &&
          sel_id[3] == 3 && sel_count[0] == 8 && sel_count[3] == 8)) begin
      failures++;
      $display("FAIL selective example");
    end
    compare("selective-directed");
    for (int i = 0; i < 3000; i++) begin
      policy = fetch_policy_e'($urandom % 2);
      valid  = N'($urandom);
      for (int j = 0; j < N; j++)
        conf[j] = (i % 7 == 0) ? 16'($urandom % 3) : 16'($urandom);
      compare("random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
