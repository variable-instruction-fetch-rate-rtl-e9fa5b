// tb_path_conf_table: the full 8132-entry table against a model array.
// After reset every counter must read 8; then random updates concentrated
// on a few entries (so counters reach both ends) and random reads are
// compared with the model, which applies the confidence rule on its own.
module tb_path_conf_table;
  localparam int E = 8132;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic [12:0] rd_idx = 0, upd_idx = 0;
  logic [3:0]  rd_conf, upd_old;
  logic upd_valid = 0, upd_correct = 0;
  int model [E];

  path_conf_table #(.ENTRIES(E), .CW(4)) dut (
    .clk, .rst_n, .rd_idx, .rd_conf, .upd_valid, .upd_idx, .upd_correct, .upd_old);

  always #5 clk = ~clk;

  function automatic int rule(input int v, input bit ok);
    if (ok) return (v < 8) ? 8 : ((v == 15) ? 15 : v + 1);
    return (v < 8) ? v + 1 : 7;
  endfunction

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < E; i++) model[i] = 8;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < E; i += 97) begin
      rd_idx = 13'(i); #1;
      checks++;
      if (rd_conf != 4'd8) begin failures++; $display("FAIL reset value at %0d", i); end
    end
    rd_idx = 13'(E - 1); #1;
    checks++;
    if (rd_conf != 4'd8) begin failures++; $display("FAIL reset value at last entry"); end
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      upd_valid   = ($urandom % 4) != 0;
      upd_idx     = ($urandom % 2) ? 13'($urandom % 6) : 13'($urandom % E);
      upd_correct = ($urandom % 3) != 0;
      rd_idx      = ($urandom % 2) ? 13'($urandom % 6) : 13'($urandom % E);
      #1;
      checks++;
      if (int'(rd_conf) != model[rd_idx]) begin
        failures++;
        $display("FAIL read idx=%0d got=%0d exp=%0d", rd_idx, rd_conf, model[rd_idx]);
      end
      @(posedge clk);
      if (upd_valid) model[upd_idx] = rule(model[upd_idx], upd_correct);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
