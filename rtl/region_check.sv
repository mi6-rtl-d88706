// region_check: per-core DRAM-region permission bitvector and check.
//
// Physical memory is divided into 2^REGION_BITS equal, contiguous DRAM
// regions; the region of a physical address is its top REGION_BITS bits
// (the same bits the LLC uses as the upper part of its set index).  Each
// core holds a bitvector, writable only in machine mode, with one bit per
// region saying whether the software running on the core may touch it.
// Every physical access the core would emit (instruction fetch, load,
// store, page-table-walk read, speculative or not) and every leaf PTE
// found by a page walk is checked here: a disallowed access is not
// emitted (emit = 0) and is flagged (fault = 1) so the core can raise an
// exception if the access becomes non-speculative.  Because a region is
// page aligned, a TLB entry filled after a passing page-walk check stays
// legal until the bitvector changes; bv_changed pulses on every write so
// the core can drop its cached translations.
// Own choices: reset value (no region allowed), one check port, the
// combinational check, and the bv_changed strobe.
module region_check #(
  parameter int unsigned PA_BITS     = 31,
  parameter int unsigned REGION_BITS = 6,
  localparam int unsigned NREG = 1 << REGION_BITS
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               priv_m,     // core is in machine mode
  input  logic               csr_we,     // write of the bitvector
  input  logic [NREG-1:0]    csr_wdata,
  output logic [NREG-1:0]    allowed,    // current bitvector
  output logic               bv_changed, // allocation changed this cycle
  input  logic               acc_valid,  // physical access to check
  input  logic [PA_BITS-1:0] acc_pa,
  output logic               emit,       // access may leave the core
  output logic               fault       // access blocked
);
  logic [REGION_BITS-1:0] r;
  logic                   wr;

  assign wr = csr_we && priv_m;
  assign r  = acc_pa[PA_BITS-1 -: REGION_BITS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      allowed    <= '0;
      bv_changed <= 1'b0;
    end else begin
      bv_changed <= wr;
      if (wr) allowed <= csr_wdata;
    end
  end

  assign emit  = acc_valid && allowed[r];
  assign fault = acc_valid && !allowed[r];
endmodule
