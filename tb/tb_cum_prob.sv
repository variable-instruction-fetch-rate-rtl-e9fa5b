// tb_cum_prob: child confidences of a fork. Directed points (full confidence
// with the lowest and highest counter) and random parents against
// P*(16+c)/32 and P*(16-c)/32, truncated.
module tb_cum_prob;
  int checks = 0, failures = 0;
  logic [15:0] parent_conf, pred_conf, alt_conf;
  logic [3:0]  ctr;

  cum_prob #(.CONF_W(16), .CW(4)) dut (.parent_conf, .ctr, .pred_conf, .alt_conf);

  task automatic check(input int p, input int c, input int ep, input int ea);
    parent_conf = 16'(p); ctr = 4'(c);
    #1;
    checks++;
    if (int'(pred_conf) != ep || int'(alt_conf) != ea) begin
      failures++;
      $display("FAIL P=%0d c=%0d got %0d/%0d exp %0d/%0d", p, c, pred_conf, alt_conf, ep, ea);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(65535, 0, 32767, 32767);   // counter 0: an even split
    check(65535, 15, 63487, 2047);   // counter 15: 31/32 against 1/32
    check(32768, 8, 24576, 8192);    // 0.5 * 0.75 and 0.5 * 0.25
    for (int i = 0; i < 2000; i++) begin
      int p, c;
      p = int'($urandom % 65536);
      c = int'($urandom % 16);
      check(p, c, (p * (16 + c)) / 32, (p * (16 - c)) / 32);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
