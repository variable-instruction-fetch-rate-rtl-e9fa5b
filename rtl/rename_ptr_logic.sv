// rename_ptr_logic: thread rename pointer logic for multi-path execution.
//
// A register written on one path must be visible to every path that forked
// from that path later, but not to its siblings. Rename pointers are kept per
// (thread ID, thread level, architectural register); writes made at level 0
// (the master thread, ahead of every unresolved branch) go to the
// architectural register pointer file instead.
//
// A lookup for register r by path ID at level L walks the ancestors as in
// the paper's flow chart, one step per clock:
//   1. if (ID, L, r) holds a pointer, that pointer is the answer;
//   2. otherwise maskBit = 1 << (L-1), siblingID = ID ^ maskBit, L = L-1,
//      and L = MAX_LEVEL if it became 0 (wrap-around);
//   3. if ParentID[ID] == siblingID and ParentLevel[ID] == L, ID = siblingID;
//   4. after MAX_LEVEL steps the architectural register pointer file is read.
// ParentID/ParentLevel of a taken child are written by the fork (fk_*).
// Example: ID 10 at level 2 forked from ID 00 at level 1, so a miss at
// (10,2) moves to (00,1) and finds the pointer written there.
//
// When the branch forked at level k resolves, the killed paths (kill mask)
// lose their pointers above level k; the ones at or below k belong to the
// shared ancestors and stay. A rebase of the thread table clears every
// per-path pointer: the master then reads the architectural file only, so
// the caller must have written the survivor's live pointers at level 0
// before allowing the rebase. Pointer storage layout, the kill rule and the
// rebase rule are this design's choices; the walk is the paper's.
//
// Interface: lk_valid/lk_ready handshake starts a lookup; res_valid pulses
// for one cycle with res_ptr, res_arch (answer from the architectural file)
// and res_steps (walk steps taken). Latency is 1 to MAX_LEVEL cycles after
// the lookup is accepted.
module rename_ptr_logic #(
  parameter int unsigned ID_W      = 20,
  parameter int unsigned MAX_LEVEL = ID_W,
  parameter int unsigned AREGS     = 32,
  parameter int unsigned PTR_W     = 12,
  parameter int unsigned N         = 1 << ID_W,
  parameter int unsigned LV_W      = $clog2(MAX_LEVEL + 2),
  parameter int unsigned AR_W      = $clog2(AREGS)
) (
  input  logic             clk,
  input  logic             rst_n,
  // fork: taken child fk_child was forked by fk_parent at level fk_level
  input  logic             fk_valid,
  input  logic [ID_W-1:0]  fk_child,
  input  logic [ID_W-1:0]  fk_parent,
  input  logic [LV_W-1:0]  fk_level,
  // kill of mispredicted paths above level kill_level
  input  logic [N-1:0]     kill,
  input  logic [LV_W-1:0]  kill_level,
  input  logic             rebase,
  // destination rename: path wr_tid at level wr_level maps wr_areg to wr_ptr
  input  logic             wr_valid,
  input  logic [ID_W-1:0]  wr_tid,
  input  logic [LV_W-1:0]  wr_level,
  input  logic [AR_W-1:0]  wr_areg,
  input  logic [PTR_W-1:0] wr_ptr,
  // source lookup
  input  logic             lk_valid,
  output logic             lk_ready,
  input  logic [ID_W-1:0]  lk_tid,
  input  logic [LV_W-1:0]  lk_level,
  input  logic [AR_W-1:0]  lk_areg,
  output logic             res_valid,
  output logic [PTR_W-1:0] res_ptr,
  output logic             res_arch,
  output logic [LV_W-1:0]  res_steps
);
  localparam int unsigned SLOTS = N * MAX_LEVEL;

  logic [PTR_W-1:0] ptr_mem [SLOTS][AREGS];
  logic [AREGS-1:0] ptr_vld [SLOTS];
  logic [PTR_W-1:0] arch_ptr [AREGS];
  logic [ID_W-1:0]  pid [N];
  logic [LV_W-1:0]  plv [N];

  function automatic int unsigned slot(input logic [ID_W-1:0] id, input logic [LV_W-1:0] lv);
    return int'(id) * MAX_LEVEL + int'(lv) - 1;
  endfunction

  // walk state
  logic            busy;
  logic [ID_W-1:0] cur;
  logic [LV_W-1:0] lvl, cnt;
  logic [AR_W-1:0] areg;

  // one step of the flow chart, combinational
  logic            hit;
  logic [ID_W-1:0] mask_bit, sib, nxt_cur;
  logic [LV_W-1:0] nxt_lvl;
  always_comb begin
    hit      = (lvl != '0) && ptr_vld[slot(cur, lvl)][areg];
    mask_bit = (lvl != '0) ? (ID_W'(1) << (lvl - 1'b1)) : '0;
    sib      = cur ^ mask_bit;
    nxt_lvl  = (lvl <= LV_W'(1)) ? LV_W'(MAX_LEVEL) : lvl - 1'b1;
    nxt_cur  = (pid[cur] == sib && plv[cur] == nxt_lvl) ? sib : cur;
  end

  assign lk_ready = !busy;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      cur       <= '0;
      lvl       <= '0;
      cnt       <= '0;
      areg      <= '0;
      res_valid <= 1'b0;
      res_ptr   <= '0;
      res_arch  <= 1'b0;
      res_steps <= '0;
      for (int unsigned s = 0; s < SLOTS; s++) ptr_vld[s] <= '0;
      for (int unsigned a = 0; a < AREGS; a++) arch_ptr[a] <= PTR_W'(a);
      for (int unsigned i = 0; i < N; i++) begin
        pid[i] <= '0;
        plv[i] <= '1;
      end
    end else begin
      res_valid <= 1'b0;
      // ancestry written by forks
      if (fk_valid) begin
        pid[fk_child] <= fk_parent;
        plv[fk_child] <= fk_level;
      end
      // squash of killed paths above the resolved level, or all on rebase
      for (int unsigned i = 0; i < N; i++)
        for (int unsigned l = 1; l <= MAX_LEVEL; l++)
          if (rebase || (kill[i] && LV_W'(l) > kill_level))
            ptr_vld[i*MAX_LEVEL + l - 1] <= '0;
      // destination rename
      if (wr_valid) begin
        if (wr_level == '0) arch_ptr[wr_areg] <= wr_ptr;
        else begin
          ptr_mem[slot(wr_tid, wr_level)][wr_areg] <= wr_ptr;
          ptr_vld[slot(wr_tid, wr_level)][wr_areg]            <= 1'b1;
        end
      end
      // lookup walk
      if (!busy) begin
        if (lk_valid) begin
          busy <= 1'b1;
          cur  <= lk_tid;
          lvl  <= lk_level;
          cnt  <= '0;
          areg <= lk_areg;
        end
      end else if (hit) begin
        busy      <= 1'b0;
        res_valid <= 1'b1;
        res_ptr   <= ptr_mem[slot(cur, lvl)][areg];
        res_arch  <= 1'b0;
        res_steps <= cnt;
      end else if (lvl == '0 || cnt + 1'b1 >= LV_W'(MAX_LEVEL)) begin
        busy      <= 1'b0;
        res_valid <= 1'b1;
        res_ptr   <= arch_ptr[areg];
        res_arch  <= 1'b1;
        res_steps <= (lvl == '0) ? cnt : cnt + 1'b1;
      end else begin
        cur <= nxt_cur;
        lvl <= nxt_lvl;
        cnt <= cnt + 1'b1;
      end
    end
  end
endmodule
