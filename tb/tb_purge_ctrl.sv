// tb_purge_ctrl: at the paper's sizes a purge must keep the core stalled
// for exactly 512 cycles when the caches never refuse, visit every L1
// line, L2-TLB set and branch-predictor group exactly once, clear the L1
// TLBs once, and pulse done in its last cycle.  A second purge with the
// L1 D-cache refusing 1 in 4 cycles must take longer and still visit
// every line once.
module tb_purge_ctrl;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, busy, done, l1i_inv, l1d_inv, l1i_ready, l1d_ready;
  logic l1tlb_clear, l2tlb_clear, bp_clear;
  logic [8:0] l1i_idx, l1d_idx, bp_group;
  logic [7:0] l2tlb_set;
  int checks = 0, failures = 0;
  int busy_cyc, done_cnt, tlb1_cnt;
  int seen_i [512], seen_d [512], seen_t [256], seen_b [512];

  purge_ctrl dut (.clk, .rst_n, .start, .busy, .done, .l1i_inv, .l1i_idx, .l1i_ready,
    .l1d_inv, .l1d_idx, .l1d_ready, .l1tlb_clear, .l2tlb_clear, .l2tlb_set,
    .bp_clear, .bp_group);

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (busy) busy_cyc++;
    if (done) begin
      done_cnt++;
      if (!busy) failures++;
    end
    if (l1tlb_clear) tlb1_cnt++;
    if (l1i_inv && l1i_ready) seen_i[l1i_idx]++;
    if (l1d_inv && l1d_ready) seen_d[l1d_idx]++;
    if (l2tlb_clear) seen_t[l2tlb_set]++;
    if (bp_clear) seen_b[bp_group]++;
  end

  task automatic run(input int refuse_pct, input int exp_cycles);
    busy_cyc = 0; done_cnt = 0; tlb1_cnt = 0;
    foreach (seen_i[i]) begin seen_i[i] = 0; seen_d[i] = 0; seen_b[i] = 0; end
    foreach (seen_t[i]) seen_t[i] = 0;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    while (busy) begin
      l1d_ready = ($urandom % 100) >= refuse_pct;
      @(negedge clk);
    end
    l1d_ready = 1;
    if (exp_cycles > 0) check(busy_cyc == exp_cycles, $sformatf("purge took %0d cycles", busy_cyc));
    else check(busy_cyc > 512, "refusals did not lengthen the purge");
    check(done_cnt == 1, "done pulses");
    check(tlb1_cnt == 1, "L1 TLB clears");
    foreach (seen_i[i]) check(seen_i[i] == 1 && seen_d[i] == 1 && seen_b[i] == 1, "line/group visits");
    foreach (seen_t[i]) check(seen_t[i] == 1, "L2 TLB set visits");
  endtask

  initial begin
    start = 0; l1i_ready = 1; l1d_ready = 1;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    run(0, 512);
    run(25, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
