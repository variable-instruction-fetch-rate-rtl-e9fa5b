// tb_gshare: random lookups and updates against a model of 16384 two-bit
// counters indexed by (PC>>2 XOR history), reset to weakly not taken.
module tb_gshare;
  localparam int E = 16384;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic [15:0] hist = 0;
  logic [31:0] lk_pc = 0, upd_pc = 0;
  logic lk_taken, upd_valid = 0, upd_taken = 0;
  int model [E];

  gshare #(.ENTRIES(E), .HIST_W(16), .PC_W(32)) dut (
    .clk, .rst_n, .hist, .lk_pc, .lk_taken, .upd_valid, .upd_pc, .upd_taken);

  always #5 clk = ~clk;

  function automatic int idx(input logic [31:0] pc, input logic [15:0] h);
    return int'((pc[15:2] ^ h[13:0]));
  endfunction

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ntaken;
    ntaken = 0;
    for (int i = 0; i < E; i++) model[i] = 1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 5000; i++) begin
      @(negedge clk);
      hist      = 16'($urandom % 4);
      lk_pc     = {$urandom % 8, 2'b00} + 32'h1000;
      upd_pc    = {$urandom % 8, 2'b00} + 32'h1000;
      upd_valid = ($urandom % 2) != 0;
      upd_taken = ($urandom % 4) != 0;
      #1;
      checks++;
      if (lk_taken != (model[idx(lk_pc, hist)] >= 2)) begin
        failures++;
        $display("FAIL pc=%h got=%0d model=%0d", lk_pc, lk_taken, model[idx(lk_pc, hist)]);
      end
      if (lk_taken) ntaken++;
      @(posedge clk);
      if (upd_valid) begin
        int k;
        k = idx(upd_pc, hist);
        if (upd_taken && model[k] < 3) model[k]++;
        else if (!upd_taken && model[k] > 0) model[k]--;
      end
    end
    checks++;
    if (ntaken == 0) begin failures++; $display("FAIL never predicted taken"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
