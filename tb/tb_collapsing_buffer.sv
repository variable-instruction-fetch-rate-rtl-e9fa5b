// tb_collapsing_buffer: random per-port counts (adding up to at most FW) and
// lines; the registered group of the next cycle is compared slot by slot
// with the packing worked out in the testbench.
module tb_collapsing_buffer;
  localparam int FW = 32, P = 4, ID_W = 8;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic [P-1:0]    in_valid;
  logic [ID_W-1:0] in_id    [P];
  logic [31:0]     in_pc    [P];
  logic [5:0]      in_count [P];
  logic [31:0]     in_line  [P][FW];
  logic [FW-1:0]   dec_valid;
  logic [31:0]     dec_insn [FW];
  logic [31:0]     dec_pc   [FW];
  logic [ID_W-1:0] dec_tid  [FW];

  collapsing_buffer #(.FW(FW), .PORTS(P), .ID_W(ID_W), .PC_W(32), .INSN_W(32)) dut (
    .clk, .rst_n, .in_valid, .in_id, .in_pc, .in_count, .in_line,
    .dec_valid, .dec_insn, .dec_pc, .dec_tid);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit          e_v   [FW];
    logic [31:0] e_i   [FW];
    logic [31:0] e_pc  [FW];
    logic [7:0]  e_tid [FW];
    in_valid = '0;
    for (int p = 0; p < P; p++) begin
      in_id[p] = '0; in_pc[p] = '0; in_count[p] = '0;
      for (int k = 0; k < FW; k++) in_line[p][k] = '0;
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 1000; it++) begin
      int left, s;
      @(negedge clk);
      left = FW;
      for (int p = 0; p < P; p++) begin
        in_valid[p] = ($urandom % 5) != 0;
        in_id[p]    = 8'($urandom);
        in_pc[p]    = {$urandom, 2'b00};
        in_count[p] = in_valid[p] ? 6'($urandom % (left + 1)) : 6'($urandom % 33);
        if (it % 10 == 0 && in_valid[p]) in_count[p] = 6'(left);
        if (in_valid[p]) left -= int'(in_count[p]);
        for (int k = 0; k < FW; k++) in_line[p][k] = $urandom;
      end
      for (int k = 0; k < FW; k++) e_v[k] = 0;
      s = 0;
      for (int p = 0; p < P; p++)
        if (in_valid[p])
          for (int k = 0; k < int'(in_count[p]); k++) begin
            e_v[s] = 1; e_i[s] = in_line[p][k]; e_pc[s] = in_pc[p] + 4 * k; e_tid[s] = in_id[p];
            s++;
          end
      @(posedge clk); #1;
      for (int k = 0; k < FW; k++) begin
        checks++;
        if (dec_valid[k] != e_v[k] ||
            (e_v[k] && (dec_insn[k] != e_i[k] || dec_pc[k] != e_pc[k] || dec_tid[k] != e_tid[k]))) begin
          failures++;
          $display("FAIL it=%0d slot=%0d v=%0d/%0d insn=%h/%h", it, k, dec_valid[k], e_v[k], dec_insn[k], e_i[k]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
