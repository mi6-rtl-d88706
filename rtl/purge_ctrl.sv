// purge_ctrl: sequencer for MI6's purge instruction.
//
// purge scrubs all per-core microarchitectural state that could carry
// information from one protection domain to the next: the L1 instruction
// and data caches, the L1 TLBs, the L2 TLB (with its translation caches)
// and the branch predictor.  The in-flight pipeline state itself is
// already emptied by the privilege change that precedes purge.  The
// sequencer starts all flushes together on start and keeps the core
// stalled (busy) until the slowest one is done:
//   * each L1 cache invalidates one line per cycle (L1_LINES lines); a line
//     advances only when the cache accepts it (l1i_ready / l1d_ready),
//     since an invalidation must also notify the LLC;
//   * the fully associative L1 TLBs are cleared in the first cycle;
//   * the L2 TLB and its translation caches drop one set per cycle;
//   * the branch predictor clears BP_PER_CYCLE entries per cycle.
// With the paper's sizes all finish in 512 cycles: busy is high for
// exactly 512 cycles after start when the caches never refuse, and done
// pulses in the last of them.  start while busy is ignored.
// Following the paper: what is flushed and at what rate.  Own choice: the
// index/strobe interface to the structures.
module purge_ctrl #(
  parameter int unsigned L1_LINES     = 512,
  parameter int unsigned L2TLB_SETS   = 256,
  parameter int unsigned BP_ENTRIES   = 4096,
  parameter int unsigned BP_PER_CYCLE = 8,
  localparam int unsigned LW = $clog2(L1_LINES),
  localparam int unsigned TW = $clog2(L2TLB_SETS),
  localparam int unsigned BP_STEPS = BP_ENTRIES / BP_PER_CYCLE,
  localparam int unsigned BW = $clog2(BP_STEPS)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  output logic          busy,        // core stalled
  output logic          done,        // last cycle of the purge
  // L1 instruction and data caches: invalidate line l1*_idx
  output logic          l1i_inv,
  output logic [LW-1:0] l1i_idx,
  input  logic          l1i_ready,
  output logic          l1d_inv,
  output logic [LW-1:0] l1d_idx,
  input  logic          l1d_ready,
  // L1 TLBs: clear all entries
  output logic          l1tlb_clear,
  // L2 TLB and translation caches: clear set l2tlb_set
  output logic          l2tlb_clear,
  output logic [TW-1:0] l2tlb_set,
  // branch predictor: clear entries bp_group*BP_PER_CYCLE .. +BP_PER_CYCLE-1
  output logic          bp_clear,
  output logic [BW-1:0] bp_group
);
  logic i_act, d_act, t_act, b_act, first;

  assign l1i_inv     = i_act;
  assign l1d_inv     = d_act;
  assign l2tlb_clear = t_act;
  assign bp_clear    = b_act;
  assign l1tlb_clear = first;
  assign busy        = i_act || d_act || t_act || b_act || first;

  logic i_last, d_last, t_last, b_last;
  assign i_last = !i_act || (l1i_ready && l1i_idx == LW'(L1_LINES - 1));
  assign d_last = !d_act || (l1d_ready && l1d_idx == LW'(L1_LINES - 1));
  assign t_last = !t_act || (l2tlb_set == TW'(L2TLB_SETS - 1));
  assign b_last = !b_act || (bp_group == BW'(BP_STEPS - 1));
  assign done   = busy && i_last && d_last && t_last && b_last;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      {i_act, d_act, t_act, b_act, first} <= '0;
      l1i_idx   <= '0;
      l1d_idx   <= '0;
      l2tlb_set <= '0;
      bp_group  <= '0;
    end else if (start && !busy) begin
      {i_act, d_act, t_act, b_act, first} <= '1;
      l1i_idx   <= '0;
      l1d_idx   <= '0;
      l2tlb_set <= '0;
      bp_group  <= '0;
    end else begin
      first <= 1'b0;
      if (i_act && l1i_ready) begin
        l1i_idx <= l1i_idx + 1'b1;
        if (l1i_idx == LW'(L1_LINES - 1)) i_act <= 1'b0;
      end
      if (d_act && l1d_ready) begin
        l1d_idx <= l1d_idx + 1'b1;
        if (l1d_idx == LW'(L1_LINES - 1)) d_act <= 1'b0;
      end
      if (t_act) begin
        l2tlb_set <= l2tlb_set + 1'b1;
        if (l2tlb_set == TW'(L2TLB_SETS - 1)) t_act <= 1'b0;
      end
      if (b_act) begin
        bp_group <= bp_group + 1'b1;
        if (bp_group == BW'(BP_STEPS - 1)) b_act <= 1'b0;
      end
    end
  end
endmodule
