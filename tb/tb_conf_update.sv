// tb_conf_update: exhaustive check of the confidence counter rule.
// Every counter value is tried with a correct and an incorrect prediction and
// compared with the expected value written out from the rule's four cases.
module tb_conf_update;
  int checks = 0, failures = 0;
  logic [3:0] cur, nxt;
  logic correct;

  conf_update #(.CW(4)) dut (.cur, .correct, .nxt);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp;
    for (int v = 0; v < 16; v++) begin
      for (int c = 0; c < 2; c++) begin
        cur = 4'(v); correct = c[0];
        #1;
        if (c == 1) exp = (v < 8) ? 8 : ((v == 15) ? 15 : v + 1);
        else        exp = (v < 8) ? v + 1 : 7;
        checks++;
        if (int'(nxt) != exp) begin
          failures++;
          $display("FAIL cur=%0d correct=%0d got=%0d exp=%0d", v, c, nxt, exp);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
