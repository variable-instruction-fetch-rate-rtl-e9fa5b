// tb_conf_hash: random branch addresses and histories against a bit-by-bit
// reference of the XOR fold and the wrap below the table size (8132).
module tb_conf_hash;
  int checks = 0, failures = 0;
  logic [31:0] br_addr;
  logic [15:0] hist;
  logic [12:0] idx;

  conf_hash #(.PC_W(32), .HIST_W(16), .ENTRIES(8132)) dut (.br_addr, .hist, .idx);

  function automatic int ref_idx(input logic [31:0] a, input logic [15:0] h);
    logic [29:0] w;
    int r;
    w = a[31:2] ^ {14'd0, h};
    r = 0;
    for (int b = 0; b < 13; b++) begin
      bit x = 0;
      for (int k = b; k < 30; k += 13) x ^= w[k];
      r |= int'(x) << b;
    end
    if (r >= 8132) r -= 8132;
    return r;
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 3000; i++) begin
      br_addr = $urandom;
      hist    = 16'($urandom);
      if (i == 0) begin br_addr = 32'h0000_7fe0; hist = 16'h0000; end  // folds to 8184
      #1;
      checks++;
      if (int'(idx) != ref_idx(br_addr, hist) || idx >= 13'd8132) begin
        failures++;
        $display("FAIL addr=%h hist=%h idx=%0d exp=%0d", br_addr, hist, idx, ref_idx(br_addr, hist));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
