// collapsing_buffer: the instruction collapsing buffer.
//
// Each instruction-cache port p delivers a line of FW consecutive
// instructions starting at the next PC of the path it serves; the scheduler
// says how many of them (count[p]) that path may fetch. The buffer packs the
// first count[p] instructions of every port, port 0 first, into one fetch
// group of FW slots, tags every slot with its thread ID and PC, and registers
// the group for the decode unit. Slot s of the group holds instruction
// s - off[p] of port p, where off[p] is the sum of the counts of the ports
// before p. The paper names the buffer; the packing order and the one-cycle
// register are this design's choice. The counts must add up to at most FW.
// Timing: the group fetched in cycle t appears on dec_* in cycle t+1.
module collapsing_buffer #(
  parameter int unsigned FW     = 32,
  parameter int unsigned PORTS  = 4,
  parameter int unsigned ID_W   = 20,
  parameter int unsigned PC_W   = 32,
  parameter int unsigned INSN_W = 32,
  parameter int unsigned CNT_W  = $clog2(FW + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [PORTS-1:0]  in_valid,
  input  logic [ID_W-1:0]   in_id    [PORTS],
  input  logic [PC_W-1:0]   in_pc    [PORTS],
  input  logic [CNT_W-1:0]  in_count [PORTS],
  input  logic [INSN_W-1:0] in_line  [PORTS][FW],
  output logic [FW-1:0]     dec_valid,
  output logic [INSN_W-1:0] dec_insn [FW],
  output logic [PC_W-1:0]   dec_pc   [FW],
  output logic [ID_W-1:0]   dec_tid  [FW]
);
  import mp_pkg::*;

  localparam int unsigned IX_W = (FW > 1) ? $clog2(FW) : 1;

  logic [CNT_W+1:0]  off [PORTS+1];
  logic [FW-1:0]     g_valid;
  logic [INSN_W-1:0] g_insn [FW];
  logic [PC_W-1:0]   g_pc   [FW];
  logic [ID_W-1:0]   g_tid  [FW];

  always_comb begin
    off[0] = '0;
    for (int unsigned p = 0; p < PORTS; p++)
      off[p+1] = off[p] + (in_valid[p] ? (CNT_W+2)'(in_count[p]) : '0);
    for (int unsigned s = 0; s < FW; s++) begin
      g_valid[s] = 1'b0;
      g_insn[s]  = '0;
      g_pc[s]    = '0;
      g_tid[s]   = '0;
      for (int unsigned p = 0; p < PORTS; p++)
        if (in_valid[p] && (CNT_W+2)'(s) >= off[p] && (CNT_W+2)'(s) < off[p+1]) begin
          g_valid[s] = 1'b1;
          g_insn[s]  = in_line[p][IX_W'((CNT_W+2)'(s) - off[p])];
          g_pc[s]    = in_pc[p] + PC_W'((CNT_W+2)'(s) - off[p]) * PC_W'(INSN_BYTES);
          g_tid[s]   = in_id[p];
        end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      dec_valid <= '0;
      for (int unsigned s = 0; s < FW; s++) begin
        dec_insn[s] <= '0;
        dec_pc[s]   <= '0;
        dec_tid[s]  <= '0;
      end
    end else begin
      dec_valid <= g_valid;
      dec_insn  <= g_insn;
      dec_pc    <= g_pc;
      dec_tid   <= g_tid;
    end
  end
endmodule
