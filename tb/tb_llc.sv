// tb_llc: self-checking testbench of the MI6 LLC.
//
// The LLC is shrunk to 16 sets of 4 ways (4 DRAM regions) so that
// replacements, write-backs and recalls happen constantly; the MSHR
// partitions keep their size (6 per core) and the DRAM controller keeps
// its 24-request limit, with a shorter latency.  Two behavioural L1s drive
// it.
//  1. Coherence stress: both cores share one pool of lines.  Every grant
//     and every load is compared with the golden store values; at the end
//     all requests must have been answered.  Each LLC mechanism (hit, fill,
//     recall/downgrade, replay, dirty replacement with retry, write-back,
//     MSHR-full stall, idle arbiter slot) must have happened.
//  2. Timing independence: core 0 runs alone in region 0, then again with
//     core 1 hammering regions 1-3.  The cycle and line of every response
//     core 0 receives must be identical in both runs.
// Throughout, a message may only reach the process stage in the slot of
// its core, and the DRAM controller must never refuse a request.
module tb_llc;
  import mi6_pkg::*;
  localparam int N = 2;
  localparam int SET_BITS = 4, REGION_BITS = 2, WAYS = 4, MPC = 6;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic     [N-1:0] upg_valid, upg_ready, dn_valid, dn_ready, out_valid, out_ready;
  upg_req_t [N-1:0] upg;
  dn_resp_t [N-1:0] dn;
  to_l1_t   [N-1:0] out_msg;
  logic dreq_valid, dreq_ready, dresp_valid;
  dram_req_t dreq;
  dram_resp_t dresp;
  llc_events_t ev;
  logic mem_en, mem_we;
  line_addr_t mem_addr;
  line_data_t mem_wdata, mem_rdata;

  llc #(.N_CORES(N), .MSHR_PER_CORE(MPC), .SET_BITS(SET_BITS), .WAYS(WAYS),
        .REGION_BITS(REGION_BITS)) dut (
    .clk, .rst_n, .upg_valid, .upg_ready, .upg, .dn_valid, .dn_ready, .dn,
    .out_valid, .out_ready, .out_msg,
    .dram_req_valid(dreq_valid), .dram_req_ready(dreq_ready), .dram_req(dreq),
    .dram_resp_valid(dresp_valid), .dram_resp(dresp), .ev);

  dram_ctrl #(.LATENCY(30), .MAX_REQS(24)) u_dc (
    .clk, .rst_n, .req_valid(dreq_valid), .req_ready(dreq_ready), .req(dreq),
    .resp_valid(dresp_valid), .resp(dresp),
    .mem_en, .mem_we, .mem_addr, .mem_wdata, .mem_rdata, .in_flight());

  dram_model u_mem (.clk, .mem_en, .mem_we, .mem_addr, .mem_wdata, .mem_rdata);

  logic [N-1:0] en, chk;
  logic [N-1:0][63:0] mask;
  int unsigned st_pct [N], ev_pct [N], sl_pct [N];
  int unsigned l1_checks [N], l1_fail [N], l1_grants [N], l1_dn [N], l1_out [N];
  logic [63:0] l1_hash [N];

  for (genvar c = 0; c < N; c++) begin : g_l1
    l1_model #(.REGION_BITS(REGION_BITS), .LOW_BITS(SET_BITS - REGION_BITS),
               .TAGN(6), .LOWN(2), .MAXP(10), .SEED(32'h1234_5678 + 32'(c) * 32'h1111)) u_l1 (
      .clk, .rst_n, .enable(en[c]), .check_en(chk[c]), .region_mask(mask[c]),
      .store_pct(st_pct[c]), .evict_pct(ev_pct[c]), .stall_pct(sl_pct[c]),
      .upg_valid(upg_valid[c]), .upg_ready(upg_ready[c]), .upg(upg[c]),
      .dn_valid(dn_valid[c]), .dn_ready(dn_ready[c]), .dn(dn[c]),
      .out_valid(out_valid[c]), .out_ready(out_ready[c]), .out_msg(out_msg[c]),
      .checks(l1_checks[c]), .failures(l1_fail[c]), .grants(l1_grants[c]),
      .dn_answered(l1_dn[c]), .grant_hash(l1_hash[c]), .outstanding(l1_out[c]));
  end

  int checks = 0, failures = 0;
  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // event counters
  int n_hit, n_fill, n_down, n_dnreq, n_replay, n_repl, n_wb, n_rd, n_full, n_idle;
  int n_slot_bad, n_dq_stall, n_pipe;
  int cyc_since_rst;
  always @(posedge clk) begin
    if (!rst_n) begin
      cyc_since_rst = 0;
    end else begin
      cyc_since_rst++;
      n_hit += int'(ev.hit);         n_fill  += int'(ev.fill);
      n_down += int'(ev.down_start); n_dnreq += int'(ev.dn_req_sent);
      n_replay += int'(ev.replay);   n_repl  += int'(ev.replace_dirty);
      n_wb += int'(ev.wb_sent);      n_rd    += int'(ev.rd_sent);
      n_full += int'(ev.mshr_full);  n_idle  += int'(ev.idle_slot);
      n_dq_stall += int'(ev.dq_stall);
      // the message in the process stage entered in the previous cycle,
      // whose slot belongs to core (cycles since reset - 1) mod N
      if (ev.pipe_valid) begin
        n_pipe++;
        if (int'(ev.pipe_core) != (cyc_since_rst - 2) % N) n_slot_bad++;
      end
    end
  end

  task automatic do_reset();
    en = '0;
    rst_n = 1'b0;
    repeat (3) @(posedge clk);
    tb_mem_pkg::clear_all();
    @(negedge clk);
    rst_n = 1'b1;
  endtask

  task automatic run_phase(input int cycles);
    repeat (cycles) @(posedge clk);
    en = '0;
    repeat (3000) begin
      @(posedge clk);
      if (l1_out[0] == 0 && l1_out[1] == 0) break;
    end
  endtask

  logic [63:0] hash_alone, hash_shared;
  int unsigned grants_alone;

  initial begin
    {n_hit, n_fill, n_down, n_dnreq, n_replay, n_repl, n_wb, n_rd, n_full, n_idle} = '0;
    {n_slot_bad, n_dq_stall, n_pipe} = '0;
    chk = '1;
    for (int c = 0; c < N; c++) begin
      st_pct[c] = 40; ev_pct[c] = 4; sl_pct[c] = 10; mask[c] = 64'hf;
    end
    // ---- 1. coherence stress ----
    do_reset();
    en = '1;
    run_phase(20000);
    for (int c = 0; c < N; c++) begin
      checks += l1_checks[c];
      failures += l1_fail[c];
      check(l1_out[c] == 0, $sformatf("core %0d requests left unanswered", c));
      check(l1_grants[c] > 500, $sformatf("core %0d got only %0d grants", c, l1_grants[c]));
    end
    $display("stress: hit=%0d fill=%0d down=%0d dnreq=%0d replay=%0d dirty_repl=%0d wb=%0d rd=%0d mshr_full=%0d idle_slot=%0d",
             n_hit, n_fill, n_down, n_dnreq, n_replay, n_repl, n_wb, n_rd, n_full, n_idle);
    check(n_hit > 0, "no hit");
    check(n_fill > 0, "no fill");
    check(n_down > 0, "no downgrade/recall");
    check(n_dnreq > 0, "no downgrade request sent");
    check(n_replay > 0, "no replay");
    check(n_repl > 0, "no dirty replacement");
    check(n_wb == n_repl, "write-backs differ from dirty replacements");
    check(n_rd > 0, "no DRAM read");
    check(n_full > 0, "MSHR partition never full");
    check(n_idle > 0, "no idle arbiter slot");

    // ---- 2. timing independence ----
    st_pct[0] = 50; ev_pct[0] = 5; sl_pct[0] = 5; mask[0] = 64'h1;
    st_pct[1] = 60; ev_pct[1] = 2; sl_pct[1] = 0; mask[1] = 64'he;
    do_reset();
    en = 2'b01;
    repeat (6000) @(posedge clk);
    hash_alone = l1_hash[0];
    grants_alone = l1_grants[0];
    do_reset();
    en = 2'b11;
    repeat (6000) @(posedge clk);
    hash_shared = l1_hash[0];
    for (int c = 0; c < N; c++) begin
      checks += l1_checks[c];
      failures += l1_fail[c];
    end
    $display("timing: core0 grants alone=%0d shared=%0d core1 grants=%0d hash %h / %h",
             grants_alone, l1_grants[0], l1_grants[1], hash_alone, hash_shared);
    check(grants_alone > 100, "core 0 made too little progress");
    check(l1_grants[1] > 100, "core 1 made too little progress");
    check(hash_alone == hash_shared, "core 0 timing depends on core 1");

    check(n_pipe > 0, "pipeline never used");
    check(n_slot_bad == 0, $sformatf("%0d messages entered outside their slot", n_slot_bad));
    check(n_dq_stall == 0, "DRAM controller back-pressured the LLC");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
