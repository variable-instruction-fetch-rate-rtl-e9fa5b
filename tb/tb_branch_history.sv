// tb_branch_history: random outcome stream against a queue model of the last
// 16 outcomes; also checks that nothing shifts without upd_valid.
module tb_branch_history;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, upd_valid = 0, upd_taken = 0;
  logic [15:0] hist, model;

  branch_history #(.HIST_W(16)) dut (.clk, .rst_n, .upd_valid, .upd_taken, .hist);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    model = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 500; i++) begin
      @(negedge clk);
      upd_valid = ($urandom % 3) != 0;
      upd_taken = 1'($urandom);
      @(posedge clk); #1;
      if (upd_valid) model = {model[14:0], upd_taken};
      checks++;
      if (hist !== model) begin
        failures++;
        $display("FAIL step %0d hist=%h exp=%h", i, hist, model);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
