// tb_mi6_top: end-to-end run of the two-core MI6 uncore at its default
// (paper) sizes: 1MB 16-way LLC, 6 MSHRs per core, 120-cycle DRAM with 24
// requests, 512-cycle purge.
//
// Scenario, as the security monitor would drive it around a context
// switch:
//  1. Machine mode: each core's DRAM-region bitvector is written (core 0
//     gets regions 0-1, core 1 regions 2-3); machine-mode fetches are
//     checked against the monitor range; memory instructions are held at
//     rename until the ROB is empty; both cores purge (512 cycles each).
//  2. Supervisor mode, two protection domains: each core's behavioural L1
//     works in its own regions, with more lines per set than ways so that
//     recalls, dirty replacements and retries happen.  Every upgrade
//     request is also run through the core's region check (must pass) and
//     random probes of foreign regions must fault.
//  3. A multithreaded enclave: both cores are given regions 0-3 and share
//     lines, so cross-core downgrades happen.
//  4. Timing independence at full size: after a reset, core 0 runs a fixed
//     pattern in region 0 alone; after another reset it runs the same
//     pattern while core 1 works in regions 1-3.  The hash of (cycle, line)
//     of every grant core 0 receives must be the same in both runs.
// Every grant and load is compared with golden data.  Each mechanism must
// have happened at least once; the DRAM controller must never have
// back-pressured the LLC.
module tb_mi6_top;
  import mi6_pkg::*;
  localparam int N = 2;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic     [N-1:0] upg_valid, upg_ready, dn_valid, dn_ready, out_valid, out_ready;
  upg_req_t [N-1:0] upg;
  dn_resp_t [N-1:0] dn;
  to_l1_t   [N-1:0] out_msg;
  logic mem_en, mem_we;
  line_addr_t mem_addr;
  line_data_t mem_wdata, mem_rdata;

  logic [N-1:0] priv_m, rgn_csr_we, rgn_changed, acc_valid, acc_emit, acc_fault;
  logic [N-1:0][63:0] rgn_csr_wdata, rgn_allowed;
  logic [N-1:0][30:0] acc_pa, sm_base, sm_size, fetch_pa;
  logic [N-1:0] sm_csr_we, fetch_valid, fetch_emit, fetch_fault;
  logic [N-1:0] rob_empty, ren_stalled;
  logic [N-1:0][1:0] dec_valid, dec_is_mem, ren_fire;
  logic [N-1:0] purge_start, purge_busy, purge_done, l1i_inv, l1d_inv, l1i_ready, l1d_ready;
  logic [N-1:0] l1tlb_clear, l2tlb_clear, bp_clear;
  logic [N-1:0][8:0] l1i_idx, l1d_idx, bp_group;
  logic [N-1:0][7:0] l2tlb_set;
  llc_events_t ev;
  logic [4:0] dram_in_flight;

  mi6_top dut (
    .clk, .rst_n,
    .l1_upg_valid(upg_valid), .l1_upg_ready(upg_ready), .l1_upg(upg),
    .l1_dn_valid(dn_valid), .l1_dn_ready(dn_ready), .l1_dn(dn),
    .l1_out_valid(out_valid), .l1_out_ready(out_ready), .l1_out(out_msg),
    .mem_en, .mem_we, .mem_addr, .mem_wdata, .mem_rdata,
    .priv_m, .rgn_csr_we, .rgn_csr_wdata, .rgn_allowed, .rgn_changed,
    .acc_valid, .acc_pa, .acc_emit, .acc_fault,
    .sm_csr_we, .sm_base, .sm_size, .fetch_valid, .fetch_pa, .fetch_emit, .fetch_fault,
    .rob_empty, .dec_valid, .dec_is_mem, .ren_fire, .ren_stalled,
    .purge_start, .purge_busy, .purge_done, .l1i_inv, .l1i_idx, .l1i_ready,
    .l1d_inv, .l1d_idx, .l1d_ready, .l1tlb_clear, .l2tlb_clear, .l2tlb_set,
    .bp_clear, .bp_group, .llc_ev(ev), .dram_in_flight);

  dram_model u_mem (.clk, .mem_en, .mem_we, .mem_addr, .mem_wdata, .mem_rdata);

  logic [N-1:0] en;
  logic [N-1:0][63:0] mask;
  int unsigned l1_checks [N], l1_fail [N], l1_grants [N], l1_dn [N], l1_out [N];
  logic [63:0] l1_hash [N];

  for (genvar c = 0; c < N; c++) begin : g_l1
    l1_model #(.REGION_BITS(6), .LOW_BITS(4), .TAGN(24), .LOWN(2), .MAXP(10),
               .SEED(32'h2468_ace1 + 32'(c) * 32'h3131)) u_l1 (
      .clk, .rst_n, .enable(en[c]), .check_en(1'b1), .region_mask(mask[c]),
      .store_pct(45), .evict_pct(3), .stall_pct(5),
      .upg_valid(upg_valid[c]), .upg_ready(upg_ready[c]), .upg(upg[c]),
      .dn_valid(dn_valid[c]), .dn_ready(dn_ready[c]), .dn(dn[c]),
      .out_valid(out_valid[c]), .out_ready(out_ready[c]), .out_msg(out_msg[c]),
      .checks(l1_checks[c]), .failures(l1_fail[c]), .grants(l1_grants[c]),
      .dn_answered(l1_dn[c]), .grant_hash(l1_hash[c]), .outstanding(l1_out[c]));
  end

  int checks = 0, failures = 0;
  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // mechanism counters
  int n_hit, n_fill, n_down, n_dnreq, n_replay, n_repl, n_wb, n_rd, n_full, n_idle, n_dqst;
  int n_rgn_emit, n_rgn_fault, n_rgn_chg, n_fg_emit, n_fg_fault, n_ns_stall, n_ns_fire, n_purge;
  always @(posedge clk) if (rst_n) begin
    n_hit += int'(ev.hit);         n_fill  += int'(ev.fill);
    n_down += int'(ev.down_start); n_dnreq += int'(ev.dn_req_sent);
    n_replay += int'(ev.replay);   n_repl  += int'(ev.replace_dirty);
    n_wb += int'(ev.wb_sent);      n_rd    += int'(ev.rd_sent);
    n_full += int'(ev.mshr_full);  n_idle  += int'(ev.idle_slot);
    n_dqst += int'(ev.dq_stall);
    for (int c = 0; c < N; c++) begin
      n_rgn_emit += int'(acc_emit[c]);  n_rgn_fault += int'(acc_fault[c]);
      n_rgn_chg  += int'(rgn_changed[c]);
      n_fg_emit  += int'(fetch_emit[c]); n_fg_fault += int'(fetch_fault[c]);
      n_ns_stall += int'(ren_stalled[c]); n_ns_fire += int'(ren_fire[c] != 0);
      n_purge    += int'(purge_done[c]);
    end
  end

  // Region check of every upgrade request a core makes, plus probes of
  // foreign regions; the expected answer follows the bitvector written.
  logic probing;
  always @(negedge clk) begin
    for (int c = 0; c < N; c++) begin
      acc_valid[c] = 1'b0;
      acc_pa[c] = '0;
      if (probing) begin
        if (upg_valid[c]) begin
          acc_valid[c] = 1'b1;
          acc_pa[c] = {upg[c].addr, 6'd0};
        end else if ($urandom % 8 == 0) begin
          acc_valid[c] = 1'b1;
          acc_pa[c] = 31'($urandom);
        end
      end
    end
    #1;
    for (int c = 0; c < N; c++) if (acc_valid[c]) begin
      checks++;
      if (acc_emit[c] != mask[c][acc_pa[c][30:25]] || acc_fault[c] == acc_emit[c]) begin
        failures++;
        $display("FAIL: region check core %0d pa %h", c, acc_pa[c]);
      end
    end
  end

  task automatic set_regions(input logic [63:0] m0, input logic [63:0] m1);
    @(negedge clk);
    rgn_csr_we = '1;
    rgn_csr_wdata[0] = m0; rgn_csr_wdata[1] = m1;
    mask[0] = m0; mask[1] = m1;
    @(negedge clk);
    rgn_csr_we = '0;
    check(rgn_allowed[0] == m0 && rgn_allowed[1] == m1, "region bitvectors");
  endtask

  task automatic drain();
    en = '0;
    repeat (20000) begin
      @(posedge clk);
      if (l1_out[0] == 0 && l1_out[1] == 0) break;
    end
    check(l1_out[0] == 0 && l1_out[1] == 0, "requests left unanswered");
  endtask

  task automatic do_reset();
    en = '0;
    rst_n = 1'b0;
    repeat (3) @(posedge clk);
    tb_mem_pkg::clear_all();
    @(negedge clk);
    rst_n = 1'b1;
  endtask

  logic [63:0] hash_alone;
  int unsigned grants_alone;
  int pc;
  initial begin
    {n_hit, n_fill, n_down, n_dnreq, n_replay, n_repl, n_wb, n_rd, n_full, n_idle, n_dqst} = '0;
    {n_rgn_emit, n_rgn_fault, n_rgn_chg, n_fg_emit, n_fg_fault, n_ns_stall, n_ns_fire, n_purge} = '0;
    en = '0; mask = '0; probing = 0;
    priv_m = '1; rgn_csr_we = '0; rgn_csr_wdata = '0;
    sm_csr_we = '0; sm_base = '0; sm_size = '0; fetch_valid = '0; fetch_pa = '0;
    rob_empty = '1; dec_valid = '0; dec_is_mem = '0;
    purge_start = '0; l1i_ready = '1; l1d_ready = '1;
    tb_mem_pkg::clear_all();
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;

    // ---- 1. machine mode: the monitor sets up the next domains ----
    set_regions(64'h3, 64'hc);
    @(negedge clk);
    sm_csr_we = '1; sm_base = {N{31'h0004_0000}}; sm_size = {N{31'h0000_8000}};
    @(negedge clk);
    sm_csr_we = '0;
    for (int i = 0; i < 40; i++) begin
      fetch_valid = '1;
      fetch_pa[0] = 31'h0004_0000 + 31'(4 * i);          // inside
      fetch_pa[1] = 31'h0004_8000 + 31'(4 * i);          // just past the end
      #1;
      check(fetch_emit[0] && !fetch_fault[0], "monitor fetch blocked");
      check(!fetch_emit[1] && fetch_fault[1], "fetch outside monitor emitted");
      @(negedge clk);
    end
    fetch_valid = '0;
    // memory instruction in machine mode waits for an empty ROB
    dec_valid = '1; dec_is_mem = {N{2'b01}}; rob_empty = '0;
    #1;
    check(ren_fire == '0 && ren_stalled == '1, "memory op renamed with busy ROB");
    @(negedge clk) rob_empty = '1;
    #1;
    check(ren_fire[0] == 2'b01 && ren_fire[1] == 2'b01, "memory op not renamed with empty ROB");
    @(negedge clk) dec_valid = '0;
    // purge both cores
    purge_start = '1;
    @(negedge clk) purge_start = '0;
    pc = 0;
    while (purge_busy != '0) begin @(negedge clk); pc++; end
    check(pc == 512, $sformatf("purge took %0d cycles", pc));

    // ---- 2. two protection domains ----
    priv_m = '0;
    probing = 1;
    en = '1;
    repeat (25000) @(posedge clk);
    drain();
    // ---- 3. multithreaded enclave over both cores ----
    priv_m = '1;
    set_regions(64'hf, 64'hf);
    priv_m = '0;
    en = '1;
    repeat (15000) @(posedge clk);
    drain();
    probing = 0;

    for (int c = 0; c < N; c++) begin
      checks += l1_checks[c];
      failures += l1_fail[c];
      check(l1_grants[c] > 1000, $sformatf("core %0d made little progress", c));
    end

    // ---- 4. timing independence ----
    mask[0] = 64'h1; mask[1] = 64'he;
    do_reset();
    en = 2'b01;
    repeat (8000) @(posedge clk);
    hash_alone = l1_hash[0];
    grants_alone = l1_grants[0];
    checks += l1_checks[0]; failures += l1_fail[0];
    do_reset();
    en = 2'b11;
    repeat (8000) @(posedge clk);
    en = '0;
    for (int c = 0; c < N; c++) begin
      checks += l1_checks[c];
      failures += l1_fail[c];
    end
    $display("timing: core 0 grants alone=%0d shared=%0d, core 1 grants=%0d, hash %h / %h",
             grants_alone, l1_grants[0], l1_grants[1], hash_alone, l1_hash[0]);
    check(grants_alone > 100 && l1_grants[1] > 100, "too little traffic in the timing test");
    check(hash_alone == l1_hash[0], "core 0 timing depends on core 1");
    $display("LLC: hit=%0d fill=%0d down=%0d dnreq=%0d replay=%0d dirty_repl=%0d wb=%0d rd=%0d mshr_full=%0d idle_slot=%0d dq_stall=%0d",
             n_hit, n_fill, n_down, n_dnreq, n_replay, n_repl, n_wb, n_rd, n_full, n_idle, n_dqst);
    $display("core: rgn_emit=%0d rgn_fault=%0d rgn_changed=%0d fetch_emit=%0d fetch_fault=%0d rename_stall=%0d rename_fire=%0d purges=%0d",
             n_rgn_emit, n_rgn_fault, n_rgn_chg, n_fg_emit, n_fg_fault, n_ns_stall, n_ns_fire, n_purge);
    check(n_hit > 0, "no LLC hit");
    check(n_fill > 0, "no LLC fill");
    check(n_down > 0, "no recall/downgrade");
    check(n_dnreq > 0, "no downgrade request");
    check(n_replay > 0, "no replay");
    check(n_repl > 0, "no dirty replacement (retry)");
    check(n_wb == n_repl, "write-backs differ from dirty replacements");
    check(n_rd > 0, "no DRAM read");
    check(n_full > 0, "MSHR partition never full");
    check(n_idle > 0, "no idle arbiter slot");
    check(n_dqst == 0, "DRAM controller back-pressured the LLC");
    check(n_rgn_emit > 0 && n_rgn_fault > 0, "region check never passed or never faulted");
    check(n_rgn_chg == 4, "region bitvector change strobes");
    check(n_fg_emit > 0 && n_fg_fault > 0, "fetch guard never passed or never faulted");
    check(n_ns_stall > 0 && n_ns_fire > 0, "rename gate never stalled or never fired");
    check(n_purge == 2, "purges completed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
