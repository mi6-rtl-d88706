// downgrade_l1: Downgrade-L1 logic for one LLC MSHR partition.
//
// MI6 duplicates this logic per MSHR partition (one per core), so MSHRs of
// different cores never compete for it.  Every cycle it looks at its own
// partition only: among the entries that still owe a downgrade request to
// some L1 (pending[e] has a bit per target core), it picks the lowest
// entry index and, within it, the lowest target core, and offers that
// request.  When the output side takes it (accept), the owning LLC marks
// the request as sent.  Purely combinational; the choice order inside the
// partition is this design's own, the per-partition duplication follows
// the paper.
module downgrade_l1
  import mi6_pkg::*;
#(
  parameter int unsigned ENTRIES = 6,
  parameter int unsigned N_CORES = 2,
  localparam int unsigned EW = (ENTRIES > 1) ? $clog2(ENTRIES) : 1,
  localparam int unsigned CW = (N_CORES > 1) ? $clog2(N_CORES) : 1
) (
  input  logic [ENTRIES-1:0][N_CORES-1:0] pending,   // downgrade still to send
  input  line_addr_t [ENTRIES-1:0]        down_addr, // line to downgrade
  input  msi_t [ENTRIES-1:0]              down_to,   // state to lower it to
  output logic                            req_valid,
  output logic [CW-1:0]                   req_core,  // target L1
  output logic [EW-1:0]                   req_entry, // MSHR within partition
  output line_addr_t                      req_addr,
  output msi_t                            req_to
);
  always_comb begin
    req_valid = 1'b0;
    req_core  = '0;
    req_entry = '0;
    req_addr  = '0;
    req_to    = MSI_I;
    for (int e = ENTRIES - 1; e >= 0; e--) begin
      if (pending[e] != '0) begin
        req_valid = 1'b1;
        req_entry = EW'(e);
        req_addr  = down_addr[e];
        req_to    = down_to[e];
        for (int c = N_CORES - 1; c >= 0; c--) begin
          if (pending[e][c]) req_core = CW'(c);
        end
      end
    end
  end
endmodule
