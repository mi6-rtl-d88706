// mi6_pkg: types and constants shared by the MI6 uncore.
//
// The machine is the two-core configuration drawn in the LLC figures: a
// 2GB physical memory (31-bit physical address), 64-byte cache lines, a
// 1MB 16-way shared LLC (1024 sets) and 64 DRAM regions.  A cache line is
// addressed by its 25-bit line address A = PA[30:6]; the DRAM region of a
// line is its top 6 bits.  Coherence between the private L1s and the LLC
// uses MSI states; the message formats below are this design's own, the
// paper only names the three link channels (upgrade request, downgrade
// response, upgrade response / downgrade request).
package mi6_pkg;

  localparam int unsigned PA_BITS        = 31;   // 2GB memory
  localparam int unsigned LINE_OFF_BITS  = 6;    // 64B lines
  localparam int unsigned LINE_ADDR_BITS = PA_BITS - LINE_OFF_BITS;
  localparam int unsigned LINE_BITS      = 512;  // 64B of data

  typedef logic [LINE_ADDR_BITS-1:0] line_addr_t;
  typedef logic [LINE_BITS-1:0]      line_data_t;

  // MSI coherence state; the numeric order I < S < M is used in compares.
  typedef enum logic [1:0] {
    MSI_I = 2'd0,
    MSI_S = 2'd1,
    MSI_M = 2'd2
  } msi_t;

  // L1 -> LLC upgrade request: "give me this line in state to_st".
  typedef struct packed {
    line_addr_t addr;
    msi_t       to_st;
  } upg_req_t;

  // L1 -> LLC downgrade response (answer to a downgrade request, or a
  // voluntary eviction).  Carries the line when the L1 held it in M.
  typedef struct packed {
    line_addr_t addr;
    msi_t       to_st;
    logic       has_data;
    line_data_t data;
  } dn_resp_t;

  // LLC -> L1 message: an upgrade response (is_down = 0, data valid) or a
  // downgrade request (is_down = 1, "lower this line to to_st").
  typedef struct packed {
    logic       is_down;
    line_addr_t addr;
    msi_t       to_st;
    line_data_t data;
  } to_l1_t;

  // LLC <-> DRAM controller.  Only reads are answered.
  typedef struct packed {
    logic       is_write;
    line_addr_t addr;
    logic [7:0] tag;
    line_data_t data;
  } dram_req_t;

  typedef struct packed {
    logic [7:0] tag;
    line_data_t data;
  } dram_resp_t;

  // One-cycle event strobes from the LLC, for performance counters and for
  // testbenches that must see each mechanism happen.
  typedef struct packed {
    logic pipe_valid;    // a message is in the process stage this cycle
    logic pipe_is_dn;    // ... and it is a downgrade response
    logic [3:0] pipe_core;  // core whose slot carried it
    logic idle_slot;     // the slot owner had nothing to send
    logic hit;           // upgrade request hit and was granted
    logic fill;          // DRAM data installed and granted
    logic down_start;    // MSHR started waiting for L1 downgrades
    logic dn_req_sent;   // a downgrade request left for an L1
    logic replay;        // request re-queued (address or slot conflict)
    logic replace_dirty; // dirty victim removed: MSHR enters DQ with retry
    logic wb_sent;       // DQ dequeue sent only the write-back (retry)
    logic rd_sent;       // DQ dequeue sent a DRAM read
    logic mshr_full;     // upgrade request waiting for a free MSHR
    logic dq_stall;      // DRAM controller refused a request (never expected)
  } llc_events_t;

endpackage
