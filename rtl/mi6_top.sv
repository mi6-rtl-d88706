// mi6_top: the uncore and the per-core security hardware of a two-core
// MI6 machine.
//
// Contents:
//  * the MI6 shared LLC (llc) with its per-core coherence links,
//  * the constant-latency DRAM controller (dram_ctrl) behind it,
//  * for each core, the hardware MI6 adds to the core: the DRAM-region
//    permission check (region_check), the machine-mode fetch range guard
//    (mfetch_guard), the machine-mode rename throttle (nonspec_gate) and
//    the purge sequencer (purge_ctrl).
// The out-of-order cores themselves (pipeline, L1 caches, TLBs, branch
// predictor) are not part of this design.  Everything that would connect
// to them comes out as ports: the three L1 coherence links per core, and
// the hooks of the four per-core security units.  The DRAM devices are
// also outside; the controller's backing-store port (mem_*) goes to them.
//
// Sizes follow the paper's configuration: 2 cores, a 1MB 16-way LLC with
// 64B lines indexed by {DRAM region, low line-address bits}, 64 DRAM
// regions, MSHRs sized to d_max / 2 = 12 in total (6 per core) for a DRAM
// controller with 24 outstanding requests and 120 cycles of latency,
// 512-line L1 caches, a 256-set L2 TLB and a 4096-entry branch-predictor
// table cleared 8 entries per cycle.  Link FIFO depth 2 is this design's
// choice.
module mi6_top
  import mi6_pkg::*;
#(
  parameter int unsigned N_CORES       = 2,
  parameter int unsigned LLC_SET_BITS  = 10,
  parameter int unsigned LLC_WAYS      = 16,
  parameter int unsigned REGION_BITS   = 6,
  parameter int unsigned DRAM_LATENCY  = 120,
  parameter int unsigned DRAM_MAX_REQS = 24,
  // d_max / (2 N): each MSHR can cause two DRAM requests
  parameter int unsigned MSHR_PER_CORE = DRAM_MAX_REQS / (2 * N_CORES),
  parameter int unsigned L1_LINES      = 512,
  parameter int unsigned L2TLB_SETS    = 256,
  parameter int unsigned BP_ENTRIES    = 4096,
  parameter int unsigned BP_PER_CYCLE  = 8,
  parameter int unsigned RENAME_WIDTH  = 2,
  localparam int unsigned NREG = 1 << REGION_BITS,
  localparam int unsigned LW   = $clog2(L1_LINES),
  localparam int unsigned TW   = $clog2(L2TLB_SETS),
  localparam int unsigned BW   = $clog2(BP_ENTRIES / BP_PER_CYCLE)
) (
  input  logic clk,
  input  logic rst_n,

  // ---- L1 coherence links, per core ----
  input  logic     [N_CORES-1:0] l1_upg_valid,
  output logic     [N_CORES-1:0] l1_upg_ready,
  input  upg_req_t [N_CORES-1:0] l1_upg,
  input  logic     [N_CORES-1:0] l1_dn_valid,
  output logic     [N_CORES-1:0] l1_dn_ready,
  input  dn_resp_t [N_CORES-1:0] l1_dn,
  output logic     [N_CORES-1:0] l1_out_valid,
  input  logic     [N_CORES-1:0] l1_out_ready,
  output to_l1_t   [N_CORES-1:0] l1_out,

  // ---- DRAM backing store ----
  output logic       mem_en,
  output logic       mem_we,
  output line_addr_t mem_addr,
  output line_data_t mem_wdata,
  input  line_data_t mem_rdata,

  // ---- per-core security hooks ----
  input  logic [N_CORES-1:0]                 priv_m,
  // DRAM-region permission bitvector and access check
  input  logic [N_CORES-1:0]                 rgn_csr_we,
  input  logic [N_CORES-1:0][NREG-1:0]       rgn_csr_wdata,
  output logic [N_CORES-1:0][NREG-1:0]       rgn_allowed,
  output logic [N_CORES-1:0]                 rgn_changed,
  input  logic [N_CORES-1:0]                 acc_valid,
  input  logic [N_CORES-1:0][PA_BITS-1:0]    acc_pa,
  output logic [N_CORES-1:0]                 acc_emit,
  output logic [N_CORES-1:0]                 acc_fault,
  // machine-mode fetch range
  input  logic [N_CORES-1:0]                 sm_csr_we,
  input  logic [N_CORES-1:0][PA_BITS-1:0]    sm_base,
  input  logic [N_CORES-1:0][PA_BITS-1:0]    sm_size,
  input  logic [N_CORES-1:0]                 fetch_valid,
  input  logic [N_CORES-1:0][PA_BITS-1:0]    fetch_pa,
  output logic [N_CORES-1:0]                 fetch_emit,
  output logic [N_CORES-1:0]                 fetch_fault,
  // machine-mode rename throttle
  input  logic [N_CORES-1:0]                 rob_empty,
  input  logic [N_CORES-1:0][RENAME_WIDTH-1:0] dec_valid,
  input  logic [N_CORES-1:0][RENAME_WIDTH-1:0] dec_is_mem,
  output logic [N_CORES-1:0][RENAME_WIDTH-1:0] ren_fire,
  output logic [N_CORES-1:0]                 ren_stalled,
  // purge
  input  logic [N_CORES-1:0]                 purge_start,
  output logic [N_CORES-1:0]                 purge_busy,
  output logic [N_CORES-1:0]                 purge_done,
  output logic [N_CORES-1:0]                 l1i_inv,
  output logic [N_CORES-1:0][LW-1:0]         l1i_idx,
  input  logic [N_CORES-1:0]                 l1i_ready,
  output logic [N_CORES-1:0]                 l1d_inv,
  output logic [N_CORES-1:0][LW-1:0]         l1d_idx,
  input  logic [N_CORES-1:0]                 l1d_ready,
  output logic [N_CORES-1:0]                 l1tlb_clear,
  output logic [N_CORES-1:0]                 l2tlb_clear,
  output logic [N_CORES-1:0][TW-1:0]         l2tlb_set,
  output logic [N_CORES-1:0]                 bp_clear,
  output logic [N_CORES-1:0][BW-1:0]         bp_group,

  // ---- observation ----
  output llc_events_t                        llc_ev,
  output logic [$clog2(DRAM_MAX_REQS+1)-1:0] dram_in_flight
);
  logic       dreq_valid, dreq_ready, dresp_valid;
  dram_req_t  dreq;
  dram_resp_t dresp;

  llc #(
    .N_CORES(N_CORES), .MSHR_PER_CORE(MSHR_PER_CORE), .SET_BITS(LLC_SET_BITS),
    .WAYS(LLC_WAYS), .REGION_BITS(REGION_BITS)
  ) u_llc (
    .clk, .rst_n,
    .upg_valid(l1_upg_valid), .upg_ready(l1_upg_ready), .upg(l1_upg),
    .dn_valid(l1_dn_valid), .dn_ready(l1_dn_ready), .dn(l1_dn),
    .out_valid(l1_out_valid), .out_ready(l1_out_ready), .out_msg(l1_out),
    .dram_req_valid(dreq_valid), .dram_req_ready(dreq_ready), .dram_req(dreq),
    .dram_resp_valid(dresp_valid), .dram_resp(dresp),
    .ev(llc_ev));

  dram_ctrl #(.LATENCY(DRAM_LATENCY), .MAX_REQS(DRAM_MAX_REQS)) u_dram (
    .clk, .rst_n,
    .req_valid(dreq_valid), .req_ready(dreq_ready), .req(dreq),
    .resp_valid(dresp_valid), .resp(dresp),
    .mem_en, .mem_we, .mem_addr, .mem_wdata, .mem_rdata,
    .in_flight(dram_in_flight));

  for (genvar c = 0; c < N_CORES; c++) begin : g_core
    region_check #(.PA_BITS(PA_BITS), .REGION_BITS(REGION_BITS)) u_rgn (
      .clk, .rst_n, .priv_m(priv_m[c]),
      .csr_we(rgn_csr_we[c]), .csr_wdata(rgn_csr_wdata[c]),
      .allowed(rgn_allowed[c]), .bv_changed(rgn_changed[c]),
      .acc_valid(acc_valid[c]), .acc_pa(acc_pa[c]),
      .emit(acc_emit[c]), .fault(acc_fault[c]));

    mfetch_guard #(.PA_BITS(PA_BITS)) u_fg (
      .clk, .rst_n, .priv_m(priv_m[c]),
      .csr_we(sm_csr_we[c]), .csr_base(sm_base[c]), .csr_size(sm_size[c]),
      .fetch_valid(fetch_valid[c]), .fetch_pa(fetch_pa[c]),
      .fetch_emit(fetch_emit[c]), .fetch_fault(fetch_fault[c]));

    nonspec_gate #(.WIDTH(RENAME_WIDTH)) u_ns (
      .priv_m(priv_m[c]), .rob_empty(rob_empty[c]),
      .dec_valid(dec_valid[c]), .dec_is_mem(dec_is_mem[c]),
      .ren_fire(ren_fire[c]), .stalled(ren_stalled[c]));

    purge_ctrl #(.L1_LINES(L1_LINES), .L2TLB_SETS(L2TLB_SETS),
                 .BP_ENTRIES(BP_ENTRIES), .BP_PER_CYCLE(BP_PER_CYCLE)) u_purge (
      .clk, .rst_n, .start(purge_start[c]),
      .busy(purge_busy[c]), .done(purge_done[c]),
      .l1i_inv(l1i_inv[c]), .l1i_idx(l1i_idx[c]), .l1i_ready(l1i_ready[c]),
      .l1d_inv(l1d_inv[c]), .l1d_idx(l1d_idx[c]), .l1d_ready(l1d_ready[c]),
      .l1tlb_clear(l1tlb_clear[c]),
      .l2tlb_clear(l2tlb_clear[c]), .l2tlb_set(l2tlb_set[c]),
      .bp_clear(bp_clear[c]), .bp_group(bp_group[c]));
  end
endmodule
