// mfetch_guard: instruction-fetch range check for machine mode.
//
// MI6's security monitor is the only machine-mode software and can reach
// all of physical memory, so its own speculation must not leave traces in
// shared state.  One of the two hardware restrictions for that is here:
// while the core is in machine mode, an instruction fetch is emitted only
// if its (physical) address lies in_range the monitor's code range
// [sm_base, sm_base + sm_size).  A fetch outside the range, which can only
// be a mis-speculated or malicious jump, is not sent to the memory system
// and is flagged; the core raises a fault if the fetch becomes
// non-speculative.  Outside machine mode the guard is transparent (the
// DRAM-region check covers those fetches).  The range registers are
// written in machine mode (csr_we); reset loads RST_BASE / RST_SIZE so
// that the monitor's boot code can run.  Combinational check, registered
// range.
// Following the paper: restricting machine-mode fetch to the monitor's
// addresses.  Own choices: base/size encoding, reset values, CSR port.
module mfetch_guard #(
  parameter int unsigned     PA_BITS  = 31,
  parameter logic [30:0]     RST_BASE = 31'h0000_0000,
  parameter logic [30:0]     RST_SIZE = 31'h0001_0000
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               priv_m,
  input  logic               csr_we,      // machine-mode write of the range
  input  logic [PA_BITS-1:0] csr_base,
  input  logic [PA_BITS-1:0] csr_size,
  input  logic               fetch_valid,
  input  logic [PA_BITS-1:0] fetch_pa,
  output logic               fetch_emit,
  output logic               fetch_fault
);
  logic [PA_BITS-1:0] base, size;
  logic [PA_BITS:0]   off;
  logic               in_range;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      base <= PA_BITS'(RST_BASE);
      size <= PA_BITS'(RST_SIZE);
    end else if (csr_we && priv_m) begin
      base <= csr_base;
      size <= csr_size;
    end
  end

  assign off    = {1'b0, fetch_pa} - {1'b0, base};   // borrow means below base
  assign in_range = !off[PA_BITS] && (off[PA_BITS-1:0] < size);

  assign fetch_emit  = fetch_valid && (!priv_m || in_range);
  assign fetch_fault = fetch_valid && priv_m && !in_range;
endmodule
