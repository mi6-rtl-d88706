// l1_model: behavioural private L1 cache of one core, for driving the LLC.
//
// It keeps an MSI state and a copy of each line it holds and issues random
// loads, stores and evictions over lines of a configurable pool:
//   line = { region, tag, low },  region from region_mask, tag < TAGN,
//   low < LOWN, placed so that low is the low part of the LLC set index.
// A load or store that lacks permission sends an upgrade request (up to
// MAXP outstanding, one per line).  Stores write a fresh value into the
// whole line and record it in tb_mem_pkg::golden.  Every upgrade response
// and every load is compared with the golden value (when check_en), so any
// coherence error shows as a failure.  Downgrade requests are answered
// when the line is held above the requested state and ignored otherwise.
// Protocol rule kept by this model: no upgrade request for a line whose
// downgrade response has not yet been taken by the LLC.
// Its random choices come from a private xorshift generator, so its
// stimulus depends only on its own seed and on the timing of its own
// responses.  grant_hash folds (cycle, line) of every response received.
module l1_model
  import mi6_pkg::*;
#(
  parameter int unsigned    REGION_BITS = 6,
  parameter int unsigned    LOW_BITS    = 4,
  parameter int unsigned    TAGN        = 8,
  parameter int unsigned    LOWN        = 2,
  parameter int unsigned    MAXP        = 8,
  parameter logic [31:0]    SEED        = 32'h1
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       enable,
  input  logic       check_en,
  input  logic [63:0] region_mask,
  input  int unsigned store_pct,
  input  int unsigned evict_pct,
  input  int unsigned stall_pct,     // chance of refusing an LLC message
  output logic       upg_valid,
  input  logic       upg_ready,
  output upg_req_t   upg,
  output logic       dn_valid,
  input  logic       dn_ready,
  output dn_resp_t   dn,
  input  logic       out_valid,
  output logic       out_ready,
  input  to_l1_t     out_msg,
  output int unsigned checks,
  output int unsigned failures,
  output int unsigned grants,
  output int unsigned dn_answered,
  output logic [63:0] grant_hash,
  output int unsigned outstanding
);
  msi_t        st   [line_addr_t];
  logic [31:0] cp   [line_addr_t];
  msi_t        pend [line_addr_t];
  upg_req_t    uq [$];
  dn_resp_t    dq [$];
  logic [31:0] rng;
  longint unsigned cyc;

  function automatic logic [31:0] nxt();
    rng ^= rng << 13;
    rng ^= rng >> 17;
    rng ^= rng << 5;
    return rng;
  endfunction

  function automatic msi_t state_of(line_addr_t a);
    return st.exists(a) ? st[a] : MSI_I;
  endfunction

  function automatic logic dn_pending(line_addr_t a);
    foreach (dq[i]) if (dq[i].addr == a) return 1'b1;
    return 1'b0;
  endfunction

  function automatic line_addr_t pick_addr();
    int unsigned r;
    line_addr_t a;
    do r = nxt() % 64; while (!region_mask[r] || r >= (1 << REGION_BITS));
    a = '0;
    a = a | (line_addr_t'(r) << (LINE_ADDR_BITS - REGION_BITS));
    a = a | (line_addr_t'(nxt() % TAGN) << LOW_BITS);
    a = a | line_addr_t'(nxt() % LOWN);
    return a;
  endfunction

  always @(negedge clk) begin
    outstanding = pend.num() + uq.size() + dq.size();
    upg_valid = rst_n && uq.size() > 0;
    upg       = (uq.size() > 0) ? uq[0] : '0;
    dn_valid  = rst_n && dq.size() > 0;
    dn        = (dq.size() > 0) ? dq[0] : '0;
    out_ready = rst_n && ((nxt() % 100) >= stall_pct);
  end

  always @(posedge clk) begin
    if (!rst_n) begin
      st.delete(); cp.delete(); pend.delete();
      uq.delete(); dq.delete();
      rng = SEED; cyc = 0;
      checks = 0; failures = 0; grants = 0; dn_answered = 0;
      grant_hash = 64'h0;
    end else begin
      cyc++;
      if (upg_valid && upg_ready) void'(uq.pop_front());
      if (dn_valid && dn_ready) void'(dq.pop_front());
      // message from the LLC
      if (out_valid && out_ready) begin
        if (!out_msg.is_down) begin
          grants++;
          grant_hash = (grant_hash * 64'd1099511628211) ^ {cyc[31:0], 7'd0, out_msg.addr};
          if (check_en) begin
            checks++;
            if (out_msg.data != tb_mem_pkg::fill_line(tb_mem_pkg::golden_word(out_msg.addr))) begin
              failures++;
              $display("L1 %h: stale grant line %h", SEED, out_msg.addr);
            end
            checks++;
            if (!pend.exists(out_msg.addr) || pend[out_msg.addr] != out_msg.to_st) begin
              failures++;
              $display("L1 %h: unexpected grant %h", SEED, out_msg.addr);
            end
          end
          st[out_msg.addr] = out_msg.to_st;
          cp[out_msg.addr] = out_msg.data[31:0];
          pend.delete(out_msg.addr);
        end else if (state_of(out_msg.addr) > out_msg.to_st) begin
          dn_resp_t r;
          r.addr     = out_msg.addr;
          r.to_st    = out_msg.to_st;
          r.has_data = (state_of(out_msg.addr) == MSI_M);
          r.data     = tb_mem_pkg::fill_line(cp[out_msg.addr]);
          dq.push_back(r);
          st[out_msg.addr] = out_msg.to_st;
          dn_answered++;
        end
      end
      // one new operation
      if (enable) begin
        line_addr_t a;
        logic       is_st;
        a = pick_addr();
        is_st = (nxt() % 100) < store_pct;
        if (!pend.exists(a) && !dn_pending(a)) begin
          if ((nxt() % 100) < evict_pct) begin
            if (state_of(a) != MSI_I) begin
              dn_resp_t r;
              r.addr     = a;
              r.to_st    = MSI_I;
              r.has_data = (state_of(a) == MSI_M);
              r.data     = tb_mem_pkg::fill_line(cp[a]);
              dq.push_back(r);
              st[a] = MSI_I;
            end
          end else if (is_st && state_of(a) == MSI_M) begin
            logic [31:0] v;
            v = nxt();
            cp[a] = v;
            tb_mem_pkg::golden[a] = v;
          end else if (!is_st && state_of(a) != MSI_I) begin
            if (check_en) begin
              checks++;
              if (cp[a] != tb_mem_pkg::golden_word(a)) begin
                failures++;
                $display("L1 %h: stale load line %h", SEED, a);
              end
            end
          end else if (pend.num() < MAXP) begin
            upg_req_t q;
            q.addr  = a;
            q.to_st = is_st ? MSI_M : MSI_S;
            uq.push_back(q);
            pend[a] = q.to_st;
          end
        end
      end
    end
  end
endmodule
