// llc: the shared last-level cache of MI6, built for strong timing
// independence between cores.
//
// The LLC is an inclusive MSI directory cache shared by N_CORES cores.
// Each core talks to it over three FIFOs (upgrade requests in, downgrade
// responses in, upgrade responses / downgrade requests out); the LLC talks
// to the DRAM controller over a request and a response channel.
//
// Organisation (following the paper's MI6 LLC):
//  * Sets are partitioned by DRAM region: the top REGION_BITS bits of the
//    set index are the region ID (the top line-address bits), so a region
//    owns 2^(SET_BITS-REGION_BITS) sets and no other region can touch them
//    (1024 sets, 64 regions: set = {R[5:0], A[3:0]}, tag = A[18:4]).
//  * MSHRs are split into one partition of MSHR_PER_CORE entries per core.
//    An upgrade request must claim an MSHR of its own core's partition
//    before it can enter the cache; a full partition only stalls that core.
//  * For each core, an entry merge picks one of that core's messages: a
//    downgrade response from its L1, or one of its MSHRs that is ready to
//    use the pipeline (new request, DRAM data to install, retry, or replay).
//    DRAM responses are buffered in the MSHR that issued the read, so the
//    DRAM response port never back-pressures.
//  * A time-division round-robin arbiter (tdm_arbiter) lets only core
//    T % N_CORES into the cache-access pipeline in cycle T, even when that
//    core has nothing to send.
//  * The cache-access pipeline is one register stage followed by the
//    process stage, which reads and writes the tag/directory and data
//    arrays.  It never stalls: every outcome is a write into an MSHR, an
//    entry in UQi or an entry in DQ, and those queues are as deep as the
//    MSHRs that can be in them.
//  * UQi (one per core, depth MSHR_PER_CORE) holds MSHR indexes ready to
//    send an upgrade response to core i.  DQ (shared, depth = all MSHRs)
//    holds MSHR indexes that must send one DRAM request.
//  * Replacing a dirty victim sets the MSHR's retry bit as it enters DQ.
//    Its DQ dequeue then sends only the write-back, so every dequeue takes
//    one cycle; the MSHR re-enters the pipeline, misses on its locked (now
//    empty) way and enters DQ again for the DRAM read.
//  * Downgrade-L1 logic is duplicated per partition (downgrade_l1).  For
//    each core, an output mux merges UQi with the downgrade requests
//    addressed to that core.
//
// Own choices where the paper is silent: the message formats (mi6_pkg);
// a single register stage before the process stage; victim choice (first
// empty way, else a per-core LFSR start point, skipping ways locked by
// other MSHRs); a request whose line is being worked on by another MSHR,
// or whose set has every way locked, is replayed (sent back to wait for
// its core's next slot); upgrade responses always carry the line; the
// output mux gives UQi priority over downgrade requests, which keeps a
// downgrade request behind the grant it refers to; among partitions
// downgrading the same core, the lowest partition goes first (those
// partitions share the line's protection domain).  Reset clears all MSHRs
// at once; the line valid bits are then cleared by a sweep of one set per
// cycle (SETS cycles, 1024 at the default size), during which no message
// is admitted to the pipeline.  Keeping the valid bits in an array without
// reset lets them be a memory rather than 16K flip-flops.
//
// The message types in mi6_pkg leave room for larger configurations: at
// 2 cores the top bits of ev.pipe_core and of the DRAM request tag (which
// carries the MSHR index, 12 of 256 values used) are constant 0.
//
// Timing: a hit granted in the process stage at cycle t is in UQi at
// t+1 and in core i's output FIFO at t+2 at the earliest.
module llc
  import mi6_pkg::*;
#(
  parameter int unsigned N_CORES       = 2,
  parameter int unsigned MSHR_PER_CORE = 6,
  parameter int unsigned SET_BITS      = 10,
  parameter int unsigned WAYS          = 16,
  parameter int unsigned REGION_BITS   = 6,
  parameter int unsigned LINK_DEPTH    = 2,
  localparam int unsigned NM   = N_CORES * MSHR_PER_CORE,
  localparam int unsigned SETS = 1 << SET_BITS,
  localparam int unsigned CW   = (N_CORES > 1) ? $clog2(N_CORES) : 1,
  localparam int unsigned PW   = (MSHR_PER_CORE > 1) ? $clog2(MSHR_PER_CORE) : 1,
  localparam int unsigned MW   = (NM > 1) ? $clog2(NM) : 1,
  localparam int unsigned WW   = (WAYS > 1) ? $clog2(WAYS) : 1,
  localparam int unsigned TAG_BITS = LINE_ADDR_BITS - SET_BITS,
  localparam int unsigned LOW_BITS = SET_BITS - REGION_BITS
) (
  input  logic clk,
  input  logic rst_n,
  // L1 links, one of each per core
  input  logic     [N_CORES-1:0] upg_valid,
  output logic     [N_CORES-1:0] upg_ready,
  input  upg_req_t [N_CORES-1:0] upg,
  input  logic     [N_CORES-1:0] dn_valid,
  output logic     [N_CORES-1:0] dn_ready,
  input  dn_resp_t [N_CORES-1:0] dn,
  output logic     [N_CORES-1:0] out_valid,
  input  logic     [N_CORES-1:0] out_ready,
  output to_l1_t   [N_CORES-1:0] out_msg,
  // DRAM controller
  output logic       dram_req_valid,
  input  logic       dram_req_ready,
  output dram_req_t  dram_req,
  input  logic       dram_resp_valid,
  input  dram_resp_t dram_resp,
  // event strobes
  output llc_events_t ev
);
  initial begin
    assert (NM <= 256) else $error("llc: DRAM tag is 8 bits");
    assert (N_CORES <= 16) else $error("llc: event core field is 4 bits");
    assert ((1 << WW) == WAYS) else $error("llc: WAYS must be a power of two");
  end

  // ------------------------------------------------------------------
  // Arrays: tag/directory and data
  // ------------------------------------------------------------------
  typedef struct packed {
    logic                      valid;
    logic                      dirty;
    logic [TAG_BITS-1:0]       tag;
    msi_t [N_CORES-1:0]        dir;    // state of the line in each L1
  } tag_ent_t;

  tag_ent_t   tag_arr  [SETS][WAYS];   // valid field unused: see vld
  line_data_t data_arr [SETS][WAYS];
  logic [WAYS-1:0] vld [SETS];         // valid bits, cleared by the sweep
  logic                init_busy;      // reset sweep running
  logic [SET_BITS-1:0] init_set;

  // ------------------------------------------------------------------
  // MSHRs, flattened: entry e belongs to core e / MSHR_PER_CORE
  // ------------------------------------------------------------------
  typedef enum logic [2:0] {
    MS_EMPTY, MS_READY, MS_INPIPE, MS_DOWN, MS_DQ, MS_DRAM, MS_UQ
  } ms_t;

  ms_t                m_state    [NM];
  line_addr_t         m_addr     [NM];
  msi_t               m_to       [NM];
  logic               m_filled   [NM];  // DRAM data buffered, to install
  logic               m_retry    [NM];  // DQ dequeue sends write-back only
  logic               m_owner    [NM];  // holds its line (and victim) busy
  logic               m_lock_v   [NM];  // a way is locked to this MSHR
  logic [SET_BITS-1:0] m_lock_set [NM];
  logic [WW-1:0]      m_lock_way [NM];
  logic [N_CORES-1:0] m_need     [NM];  // L1s that still must downgrade
  logic [N_CORES-1:0] m_sent     [NM];  // downgrade requests already sent
  line_addr_t         m_dn_addr  [NM];
  msi_t               m_dn_to    [NM];
  line_addr_t         m_wb_addr  [NM];
  line_data_t         m_data     [NM];

  // ------------------------------------------------------------------
  // Incoming link FIFOs
  // ------------------------------------------------------------------
  logic     [N_CORES-1:0] uf_valid, uf_deq, df_valid, df_deq;
  upg_req_t [N_CORES-1:0] uf_data;
  dn_resp_t [N_CORES-1:0] df_data;

  for (genvar c = 0; c < N_CORES; c++) begin : g_in
    sync_fifo #(.T(upg_req_t), .DEPTH(LINK_DEPTH)) u_upg_q (
      .clk, .rst_n,
      .enq_valid(upg_valid[c]), .enq_ready(upg_ready[c]), .enq_data(upg[c]),
      .deq_valid(uf_valid[c]), .deq_ready(uf_deq[c]), .deq_data(uf_data[c]),
      .count());
    sync_fifo #(.T(dn_resp_t), .DEPTH(LINK_DEPTH)) u_dn_q (
      .clk, .rst_n,
      .enq_valid(dn_valid[c]), .enq_ready(dn_ready[c]), .enq_data(dn[c]),
      .deq_valid(df_valid[c]), .deq_ready(df_deq[c]), .deq_data(df_data[c]),
      .count());
  end

  // ------------------------------------------------------------------
  // MSHR allocation, per partition (no cross-core interaction)
  // ------------------------------------------------------------------
  logic [N_CORES-1:0]          alloc_ok;
  logic [N_CORES-1:0][PW-1:0]  alloc_idx;

  always_comb begin
    for (int c = 0; c < N_CORES; c++) begin
      alloc_ok[c]  = 1'b0;
      alloc_idx[c] = '0;
      for (int i = MSHR_PER_CORE - 1; i >= 0; i--) begin
        if (m_state[c*MSHR_PER_CORE + i] == MS_EMPTY) begin
          alloc_ok[c]  = 1'b1;
          alloc_idx[c] = PW'(i);
        end
      end
      uf_deq[c] = uf_valid[c] && alloc_ok[c];
    end
  end

  // ------------------------------------------------------------------
  // Per-core entry merge and the round-robin (TDM) arbiter
  // ------------------------------------------------------------------
  logic [N_CORES-1:0]         has_msg;
  logic [CW-1:0]              slot;
  logic [N_CORES-1:0]         grant;
  logic [N_CORES-1:0]         rdy_any;
  logic [N_CORES-1:0][PW-1:0] rdy_idx;

  // Choice among a core's ready MSHRs: an MSHR that already owns its line
  // (DRAM data to install, retry, recall done) goes first, so that it can
  // never be starved by requests that replay on that very line; the rest
  // are taken round-robin from rr_ptr (owners too, among themselves).
  logic [N_CORES-1:0][PW-1:0] rr_ptr;

  always_comb begin
    for (int c = 0; c < N_CORES; c++) begin
      rdy_any[c] = 1'b0;
      rdy_idx[c] = '0;
      for (int k = MSHR_PER_CORE - 1; k >= 0; k--) begin
        int i;
        i = (k + int'(rr_ptr[c])) % MSHR_PER_CORE;
        if (m_state[c*MSHR_PER_CORE + i] == MS_READY) begin
          rdy_any[c] = 1'b1;
          rdy_idx[c] = PW'(i);
        end
      end
      for (int k = MSHR_PER_CORE - 1; k >= 0; k--) begin
        int i;
        i = (k + int'(rr_ptr[c])) % MSHR_PER_CORE;
        if (m_state[c*MSHR_PER_CORE + i] == MS_READY && m_owner[c*MSHR_PER_CORE + i]) begin
          rdy_idx[c] = PW'(i);
        end
      end
      has_msg[c] = !init_busy && (df_valid[c] || rdy_any[c]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rr_ptr <= '0;
    end else begin
      for (int c = 0; c < N_CORES; c++) begin
        if (grant[c] && !df_valid[c])
          rr_ptr[c] <= (rdy_idx[c] == PW'(MSHR_PER_CORE - 1)) ? '0 : rdy_idx[c] + 1'b1;
      end
    end
  end

  tdm_arbiter #(.N_CORES(N_CORES)) u_arb (
    .clk, .rst_n, .req(has_msg), .slot, .grant);

  // Entry into the pipeline register.  Downgrade responses go first.
  typedef struct packed {
    logic          valid;
    logic          is_dn;
    logic [CW-1:0] core;
    logic [MW-1:0] e;        // MSHR, for upgrade-type messages
    dn_resp_t      dn;
  } pipe_t;

  pipe_t pin, pq;
  logic  enter_mshr;

  always_comb begin
    pin        = '0;
    enter_mshr = 1'b0;
    df_deq     = '0;
    pin.core   = slot;
    if (grant[slot]) begin
      pin.valid = 1'b1;
      if (df_valid[slot]) begin
        pin.is_dn    = 1'b1;
        pin.dn       = df_data[slot];
        df_deq[slot] = 1'b1;
      end else begin
        pin.e      = MW'(slot * MSHR_PER_CORE + rdy_idx[slot]);
        enter_mshr = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) pq <= '0;
    else        pq <= pin;
  end

  // ------------------------------------------------------------------
  // Process stage
  // ------------------------------------------------------------------
  line_addr_t          p_addr;
  // Set-partitioned index: the upper REGION_BITS bits of the set index
  // are the DRAM region (the top line-address bits), the rest are the low
  // line-address bits; the tag is the bits in between.  Two DRAM regions
  // therefore never share a set.
  //   set = { A[LINE_ADDR_BITS-1 -: REGION_BITS], A[LOW_BITS-1:0] }
  //   tag = A[LINE_ADDR_BITS-REGION_BITS-1 : LOW_BITS]
  function automatic logic [SET_BITS-1:0] set_of(input line_addr_t a);
    return {a[LINE_ADDR_BITS-1 -: REGION_BITS], a[LOW_BITS-1:0]};
  endfunction
  function automatic logic [TAG_BITS-1:0] tag_of(input line_addr_t a);
    return a[LINE_ADDR_BITS-REGION_BITS-1 : LOW_BITS];
  endfunction
  function automatic line_addr_t addr_of(input logic [SET_BITS-1:0] s,
                                         input logic [TAG_BITS-1:0] t);
    return {s[SET_BITS-1 -: REGION_BITS], t, s[LOW_BITS-1:0]};
  endfunction

  logic [SET_BITS-1:0] p_set;
  logic [TAG_BITS-1:0] p_tag;
  logic [SET_BITS-1:0] v_set;
  logic [TAG_BITS-1:0] v_tag;
  line_addr_t          v_addr;

  assign p_addr = pq.is_dn ? pq.dn.addr : m_addr[pq.e];

  assign p_set  = set_of(p_addr);
  assign p_tag  = tag_of(p_addr);
  assign v_addr = addr_of(v_set, v_tag);

  // set and tag of every MSHR's line, for victim exclusion
  logic [SET_BITS-1:0] m_set [NM];
  logic [TAG_BITS-1:0] m_tag [NM];
  for (genvar e = 0; e < NM; e++) begin : g_mi
    assign m_set[e] = set_of(m_addr[e]);
    assign m_tag[e] = tag_of(m_addr[e]);
  end

  tag_ent_t [WAYS-1:0] row;
  always_comb begin
    for (int w = 0; w < WAYS; w++) begin
      row[w]       = tag_arr[p_set][w];
      row[w].valid = vld[p_set][w];
    end
  end

  // Results of the process stage, applied in the sequential block below.
  logic                t_we;       // tag/dir write
  logic [WW-1:0]       t_way;
  tag_ent_t            t_val;
  logic                d_we;       // data write
  line_data_t          d_val;
  logic                m_we;       // update of the MSHR in the pipeline
  ms_t                 m_nstate;
  logic                m_set_data;
  line_data_t          m_ndata;
  logic                m_nowner, m_nretry, m_nfilled, m_nlock_v;
  logic [WW-1:0]       m_nlock_way;
  logic [N_CORES-1:0]  m_nneed;
  line_addr_t          m_ndn_addr, m_nwb_addr;
  msi_t                m_ndn_to;
  logic [NM-1:0]       wake;       // MSHRs whose downgrade from pq.core is done
  logic                uq_enq, dq_enq;
  logic                lfsr_step;

  logic [WAYS-1:0]     hit_vec, lock_vec;
  logic                hit;
  logic [WW-1:0]       hit_way, vic_way;
  logic                vic_ok, conflict;
  logic [N_CORES-1:0]  others, holders;
  logic [MW-1:0]       pe;
  logic [CW-1:0]       pc;
  logic [7:0]          lfsr [N_CORES];

  always_comb begin
    pe = pq.e;
    pc = pq.core;
    // tag match
    hit_vec = '0;
    for (int w = 0; w < WAYS; w++)
      hit_vec[w] = row[w].valid && (row[w].tag == p_tag);
    hit     = (hit_vec != '0);
    hit_way = '0;
    for (int w = WAYS - 1; w >= 0; w--) if (hit_vec[w]) hit_way = WW'(w);
    // ways locked by other MSHRs in this set, or holding a line another
    // MSHR owns: neither may be chosen as a victim
    lock_vec = '0;
    for (int e = 0; e < NM; e++) begin
      if (m_lock_v[e] && m_lock_set[e] == p_set && MW'(e) != pe)
        lock_vec[m_lock_way[e]] = 1'b1;
      for (int w = 0; w < WAYS; w++)
        if (m_owner[e] && MW'(e) != pe && m_set[e] == p_set &&
            row[w].valid && row[w].tag == m_tag[e])
          lock_vec[w] = 1'b1;
    end
    // another MSHR is already working on this line (its own line, or the
    // victim it is recalling or replacing)
    conflict = 1'b0;
    for (int e = 0; e < NM; e++)
      if (MW'(e) != pe && m_owner[e] &&
          (m_addr[e] == p_addr || m_dn_addr[e] == p_addr))
        conflict = 1'b1;
    // victim: own locked way, else first empty unlocked way, else the
    // first unlocked way at or after this core's LFSR point
    vic_ok  = 1'b0;
    vic_way = '0;
    if (m_lock_v[pe]) begin
      vic_ok  = 1'b1;
      vic_way = m_lock_way[pe];
    end else begin
      for (int k = WAYS - 1; k >= 0; k--) begin
        if (!lock_vec[WW'(k + 32'(lfsr[pc]))]) begin
          vic_ok  = 1'b1;
          vic_way = WW'(k + 32'(lfsr[pc]));
        end
      end
      for (int w = WAYS - 1; w >= 0; w--) begin
        if (!lock_vec[w] && !row[w].valid) begin
          vic_ok  = 1'b1;
          vic_way = WW'(w);
        end
      end
    end
    // L1s other than the requester that conflict with the requested state
    others = '0;
    for (int c = 0; c < N_CORES; c++) begin
      if (CW'(c) != pc) begin
        if (m_to[pe] == MSI_M) others[c] = (row[hit_way].dir[c] != MSI_I);
        else                   others[c] = (row[hit_way].dir[c] == MSI_M);
      end
    end
    holders = '0;
    for (int c = 0; c < N_CORES; c++) holders[c] = (row[vic_way].dir[c] != MSI_I);
  end

  assign v_set = p_set;
  assign v_tag = row[vic_way].tag;

  always_comb begin

    // defaults
    t_we = 1'b0;  t_way = '0;  t_val = '0;
    d_we = 1'b0;  d_val = '0;
    m_we = 1'b0;  m_nstate = MS_READY;  m_set_data = 1'b0;  m_ndata = '0;
    m_nowner = m_owner[pe];  m_nretry = m_retry[pe];  m_nfilled = m_filled[pe];
    m_nlock_v = m_lock_v[pe];  m_nlock_way = m_lock_way[pe];
    m_nneed = '0;  m_ndn_addr = m_dn_addr[pe];  m_ndn_to = m_dn_to[pe];
    m_nwb_addr = m_wb_addr[pe];
    wake = '0;  uq_enq = 1'b0;  dq_enq = 1'b0;  lfsr_step = 1'b0;

    if (pq.valid && pq.is_dn) begin
      // ---- downgrade response from L1 pc ----
      if (hit) begin
        t_we  = 1'b1;
        t_way = hit_way;
        t_val = row[hit_way];
        t_val.dir[pc] = pq.dn.to_st;
        if (pq.dn.has_data) begin
          t_val.dirty = 1'b1;
          d_we  = 1'b1;
          d_val = pq.dn.data;
        end
      end
      for (int e = 0; e < NM; e++)
        if (m_state[e] == MS_DOWN && m_dn_addr[e] == pq.dn.addr &&
            m_need[e][pc] && pq.dn.to_st <= m_dn_to[e])
          wake[e] = 1'b1;
    end else if (pq.valid) begin
      // ---- an MSHR of core pc ----
      m_we = 1'b1;
      if (m_filled[pe]) begin
        // install DRAM data into the locked way, then grant
        t_we  = 1'b1;
        t_way = m_lock_way[pe];
        t_val.valid = 1'b1;
        t_val.dirty = 1'b0;
        t_val.tag   = p_tag;
        for (int c = 0; c < N_CORES; c++) t_val.dir[c] = MSI_I;
        t_val.dir[pc] = m_to[pe];
        d_we  = 1'b1;
        d_val = m_data[pe];
        m_nstate = MS_UQ;  m_nowner = 1'b0;  m_nfilled = 1'b0;  m_nlock_v = 1'b0;
        uq_enq = 1'b1;
      end else if (conflict) begin
        m_nstate = MS_READY;                       // replay
      end else if (hit) begin
        if (others == '0) begin
          t_we  = 1'b1;
          t_way = hit_way;
          t_val = row[hit_way];
          t_val.dir[pc] = m_to[pe];
          m_set_data = 1'b1;
          m_ndata    = data_arr[p_set][hit_way];
          m_nstate = MS_UQ;  m_nowner = 1'b0;  m_nlock_v = 1'b0;
          uq_enq = 1'b1;
        end else begin
          m_nstate   = MS_DOWN;  m_nowner = 1'b1;
          m_nneed    = others;
          m_ndn_addr = p_addr;
          m_ndn_to   = (m_to[pe] == MSI_M) ? MSI_I : MSI_S;
        end
      end else if (!vic_ok) begin
        m_nstate = MS_READY;                       // every way locked: replay
      end else begin
        m_nowner = 1'b1;  m_nlock_v = 1'b1;  m_nlock_way = vic_way;
        if (!m_lock_v[pe]) lfsr_step = 1'b1;
        if (!row[vic_way].valid) begin
          m_nstate = MS_DQ;  m_nretry = 1'b0;  dq_enq = 1'b1;   // pure miss
        end else if (holders != '0) begin
          m_nstate   = MS_DOWN;                   // recall victim from L1s
          m_nneed    = holders;
          m_ndn_addr = v_addr;
          m_ndn_to   = MSI_I;
        end else begin
          // replacement completes: drop the victim, lock its way
          t_we  = 1'b1;
          t_way = vic_way;
          t_val = row[vic_way];
          t_val.valid = 1'b0;
          dq_enq = 1'b1;
          m_nstate = MS_DQ;
          if (row[vic_way].dirty) begin
            m_nretry   = 1'b1;
            m_nwb_addr = v_addr;
            m_set_data = 1'b1;
            m_ndata    = data_arr[p_set][vic_way];
          end else begin
            m_nretry = 1'b0;
          end
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (t_we) tag_arr[p_set][t_way] <= t_val;
    if (d_we) data_arr[p_set][t_way] <= d_val;
  end

  always_ff @(posedge clk) begin
    if (init_busy) vld[init_set] <= '0;
    else if (t_we) vld[p_set][t_way] <= t_val.valid;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      init_busy <= 1'b1;
      init_set  <= '0;
    end else if (init_busy) begin
      init_set  <= init_set + 1'b1;
      init_busy <= (init_set != SET_BITS'(SETS - 1));
    end
  end

  // Per-core replacement LFSRs: a core's victim choice depends only on its
  // own replacement history.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < N_CORES; c++) lfsr[c] <= 8'h5a + 8'(c);
    end else if (lfsr_step) begin
      lfsr[pc] <= {lfsr[pc][6:0], lfsr[pc][7] ^ lfsr[pc][5] ^ lfsr[pc][4] ^ lfsr[pc][3]};
    end
  end

  // ------------------------------------------------------------------
  // UQi and DQ
  // ------------------------------------------------------------------
  logic [N_CORES-1:0]         uq_valid, uq_deq, uq_in;
  logic [N_CORES-1:0][PW-1:0] uq_head;
  logic [N_CORES-1:0]         uq_enq_ready;
  logic                       dq_valid, dq_deq, dq_enq_ready;
  logic [MW-1:0]              dq_head;

  for (genvar c = 0; c < N_CORES; c++) begin : g_uq
    assign uq_in[c] = uq_enq && (pc == CW'(c));
    sync_fifo #(.T(logic [PW-1:0]), .DEPTH(MSHR_PER_CORE)) u_uq (
      .clk, .rst_n,
      .enq_valid(uq_in[c]), .enq_ready(uq_enq_ready[c]),
      .enq_data(PW'(pe - MW'(c * MSHR_PER_CORE))),
      .deq_valid(uq_valid[c]), .deq_ready(uq_deq[c]), .deq_data(uq_head[c]),
      .count());
  end

  sync_fifo #(.T(logic [MW-1:0]), .DEPTH(NM)) u_dq (
    .clk, .rst_n,
    .enq_valid(dq_enq), .enq_ready(dq_enq_ready), .enq_data(pe),
    .deq_valid(dq_valid), .deq_ready(dq_deq), .deq_data(dq_head),
    .count());

  assign dram_req_valid = dq_valid;
  assign dq_deq         = dq_valid && dram_req_ready;
  always_comb begin
    dram_req.is_write = m_retry[dq_head];
    dram_req.addr     = m_retry[dq_head] ? m_wb_addr[dq_head] : m_addr[dq_head];
    dram_req.tag      = 8'(dq_head);
    dram_req.data     = m_data[dq_head];
  end

  // ------------------------------------------------------------------
  // Downgrade-L1 logic, one copy per partition
  // ------------------------------------------------------------------
  logic [N_CORES-1:0]          dl_valid;
  logic [N_CORES-1:0][CW-1:0]  dl_core;
  logic [N_CORES-1:0][PW-1:0]  dl_entry;
  line_addr_t [N_CORES-1:0]    dl_addr;
  msi_t [N_CORES-1:0]          dl_to;
  logic [N_CORES-1:0]          dl_acc;

  for (genvar p = 0; p < N_CORES; p++) begin : g_dl
    logic [MSHR_PER_CORE-1:0][N_CORES-1:0] pend;
    line_addr_t [MSHR_PER_CORE-1:0]        da;
    msi_t [MSHR_PER_CORE-1:0]              dt;
    always_comb begin
      for (int i = 0; i < MSHR_PER_CORE; i++) begin
        pend[i] = (m_state[p*MSHR_PER_CORE + i] == MS_DOWN)
                ? (m_need[p*MSHR_PER_CORE + i] & ~m_sent[p*MSHR_PER_CORE + i]) : '0;
        da[i]   = m_dn_addr[p*MSHR_PER_CORE + i];
        dt[i]   = m_dn_to[p*MSHR_PER_CORE + i];
      end
    end
    downgrade_l1 #(.ENTRIES(MSHR_PER_CORE), .N_CORES(N_CORES)) u_dl (
      .pending(pend), .down_addr(da), .down_to(dt),
      .req_valid(dl_valid[p]), .req_core(dl_core[p]), .req_entry(dl_entry[p]),
      .req_addr(dl_addr[p]), .req_to(dl_to[p]));
  end

  // ------------------------------------------------------------------
  // Per-core output mux: UQi first, then downgrade requests for core i
  // ------------------------------------------------------------------
  to_l1_t [N_CORES-1:0] of_data;
  logic   [N_CORES-1:0] of_valid, of_ready;

  always_comb begin
    uq_deq = '0;
    dl_acc = '0;
    for (int k = 0; k < N_CORES; k++) begin
      of_valid[k] = 1'b0;
      of_data[k]  = '0;
      if (uq_valid[k]) begin
        of_valid[k]       = 1'b1;
        of_data[k].is_down = 1'b0;
        of_data[k].addr   = m_addr[k*MSHR_PER_CORE + int'(uq_head[k])];
        of_data[k].to_st  = m_to[k*MSHR_PER_CORE + int'(uq_head[k])];
        of_data[k].data   = m_data[k*MSHR_PER_CORE + int'(uq_head[k])];
        uq_deq[k]         = of_ready[k];
      end else begin
        for (int p = N_CORES - 1; p >= 0; p--) begin
          if (dl_valid[p] && dl_core[p] == CW'(k)) begin
            of_valid[k]        = 1'b1;
            of_data[k].is_down = 1'b1;
            of_data[k].addr    = dl_addr[p];
            of_data[k].to_st   = dl_to[p];
            of_data[k].data    = '0;
          end
        end
        for (int p = 0; p < N_CORES; p++) begin
          if (dl_valid[p] && dl_core[p] == CW'(k)) begin
            dl_acc[p] = of_ready[k];
            break;
          end
        end
      end
    end
  end

  for (genvar k = 0; k < N_CORES; k++) begin : g_out
    sync_fifo #(.T(to_l1_t), .DEPTH(LINK_DEPTH)) u_out_q (
      .clk, .rst_n,
      .enq_valid(of_valid[k]), .enq_ready(of_ready[k]), .enq_data(of_data[k]),
      .deq_valid(out_valid[k]), .deq_ready(out_ready[k]), .deq_data(out_msg[k]),
      .count());
  end

  // ------------------------------------------------------------------
  // MSHR state update
  // ------------------------------------------------------------------
  logic [MW-1:0] dr_e;
  assign dr_e = MW'(dram_resp.tag);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int e = 0; e < NM; e++) begin
        m_state[e]  <= MS_EMPTY;
        m_filled[e] <= 1'b0;
        m_retry[e]  <= 1'b0;
        m_owner[e]  <= 1'b0;
        m_lock_v[e] <= 1'b0;
        m_need[e]   <= '0;
        m_sent[e]   <= '0;
      end
    end else begin
      // allocation (EMPTY -> READY)
      for (int c = 0; c < N_CORES; c++) begin
        if (uf_deq[c]) begin
          m_state [c*MSHR_PER_CORE + int'(alloc_idx[c])] <= MS_READY;
          m_addr  [c*MSHR_PER_CORE + int'(alloc_idx[c])] <= uf_data[c].addr;
          m_to    [c*MSHR_PER_CORE + int'(alloc_idx[c])] <= uf_data[c].to_st;
          m_filled[c*MSHR_PER_CORE + int'(alloc_idx[c])] <= 1'b0;
          m_retry [c*MSHR_PER_CORE + int'(alloc_idx[c])] <= 1'b0;
          m_owner [c*MSHR_PER_CORE + int'(alloc_idx[c])] <= 1'b0;
          m_lock_v[c*MSHR_PER_CORE + int'(alloc_idx[c])] <= 1'b0;
          m_dn_addr[c*MSHR_PER_CORE + int'(alloc_idx[c])] <= uf_data[c].addr;
        end
      end
      // pipeline entry (READY -> INPIPE)
      if (enter_mshr) m_state[pin.e] <= MS_INPIPE;
      // process stage result (INPIPE -> ...)
      if (m_we) begin
        m_state[pe]    <= m_nstate;
        m_owner[pe]    <= m_nowner;
        m_retry[pe]    <= m_nretry;
        m_filled[pe]   <= m_nfilled;
        m_lock_v[pe]   <= m_nlock_v;
        m_lock_way[pe] <= m_nlock_way;
        m_lock_set[pe] <= p_set;
        m_dn_addr[pe]  <= m_ndn_addr;
        m_dn_to[pe]    <= m_ndn_to;
        m_wb_addr[pe]  <= m_nwb_addr;
        if (m_nstate == MS_DOWN) begin
          m_need[pe] <= m_nneed;
          m_sent[pe] <= '0;
        end
        if (m_set_data) m_data[pe] <= m_ndata;
      end
      // downgrade responses (DOWN -> READY once nothing is owed)
      for (int e = 0; e < NM; e++) begin
        if (wake[e]) begin
          m_need[e][pc] <= 1'b0;
          if ((m_need[e] & ~(N_CORES'(1) << pc)) == '0) m_state[e] <= MS_READY;
        end
      end
      // downgrade requests that left
      for (int p = 0; p < N_CORES; p++)
        if (dl_acc[p]) m_sent[p*MSHR_PER_CORE + int'(dl_entry[p])][dl_core[p]] <= 1'b1;
      // DQ dequeue (DQ -> READY for a retry, DQ -> DRAM for a read)
      if (dq_deq) m_state[dq_head] <= m_retry[dq_head] ? MS_READY : MS_DRAM;
      // DRAM response: buffered in its MSHR, never back-pressured
      if (dram_resp_valid) begin
        m_data[dr_e]   <= dram_resp.data;
        m_filled[dr_e] <= 1'b1;
        m_state[dr_e]  <= MS_READY;
      end
      // upgrade response sent (UQ -> EMPTY)
      for (int k = 0; k < N_CORES; k++)
        if (uq_deq[k]) m_state[k*MSHR_PER_CORE + int'(uq_head[k])] <= MS_EMPTY;
    end
  end

  // ------------------------------------------------------------------
  // Events and checks
  // ------------------------------------------------------------------
  always_comb begin
    ev = '0;
    ev.pipe_valid    = pq.valid;
    ev.pipe_is_dn    = pq.valid && pq.is_dn;
    ev.pipe_core     = 4'(pq.core);
    ev.idle_slot     = !has_msg[slot];
    ev.hit           = m_we && uq_enq && !m_filled[pe];
    ev.fill          = m_we && uq_enq && m_filled[pe];
    ev.down_start    = m_we && m_nstate == MS_DOWN;
    ev.dn_req_sent   = dl_acc != '0;
    ev.replay        = m_we && m_nstate == MS_READY;
    ev.replace_dirty = dq_enq && m_nretry;
    ev.wb_sent       = dq_deq && m_retry[dq_head];
    ev.rd_sent       = dq_deq && !m_retry[dq_head];
    ev.mshr_full     = (uf_valid & ~alloc_ok) != '0;
    ev.dq_stall      = dq_valid && !dram_req_ready;
  end

  // UQi and DQ are sized so that the pipeline never waits on them.
  assert property (@(posedge clk) disable iff (!rst_n) uq_enq |-> uq_enq_ready[pc]);
  assert property (@(posedge clk) disable iff (!rst_n) dq_enq |-> dq_enq_ready);
  // A DRAM response always names an MSHR that is waiting for one.
  assert property (@(posedge clk) disable iff (!rst_n)
                   dram_resp_valid |-> m_state[dr_e] == MS_DRAM);
endmodule
