// dram_ctrl: constant-latency, in-order DRAM controller.
//
// MI6 requires a DRAM controller whose timing cannot couple protection
// domains; the paper's system uses one with a constant latency, and sizes
// the LLC MSHRs so that this controller's limit of MAX_REQS outstanding
// requests is never reached.  Every accepted request is performed on the
// backing store in the cycle it is accepted (a write stores its line, a
// read captures the line) and then spends exactly LATENCY cycles in an
// in-order queue.  When a read leaves the queue its data is returned on
// resp; writes leave silently.  At most MAX_REQS requests are in flight;
// req_ready drops when the queue is full (back-pressure, which a correctly
// sized LLC never sees).  At most one request is accepted per cycle.
//
// Interface timing: a read accepted at cycle t (req_valid && req_ready at
// the clock edge ending t) has resp_valid high in cycle t + LATENCY.
// The backing store (mem_*) is the DRAM itself and is outside this module;
// it must answer mem_rdata combinationally.  Following the paper: the
// constant latency, 120 cycles and 24 requests.  Own choice: the queue
// structure and the immediate access to the backing store.  Because the
// store is reached directly, mem_addr / mem_wdata are wires from req, and
// mem_rdata is captured into the queue: those outputs carry inputs through
// by design.
module dram_ctrl
  import mi6_pkg::*;
#(
  parameter int unsigned LATENCY  = 120,
  parameter int unsigned MAX_REQS = 24
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       req_valid,
  output logic       req_ready,
  input  dram_req_t  req,
  output logic       resp_valid,
  output dram_resp_t resp,
  // backing store
  output logic       mem_en,
  output logic       mem_we,
  output line_addr_t mem_addr,
  output line_data_t mem_wdata,
  input  line_data_t mem_rdata,
  output logic [$clog2(MAX_REQS+1)-1:0] in_flight
);
  typedef struct packed {
    logic        is_write;
    logic [31:0] due;       // cycle at which it completes
    dram_resp_t  r;
  } slot_t;

  logic [31:0] now;
  logic        acc, done;
  slot_t       head, ent;

  assign req_ready = (in_flight != $bits(in_flight)'(MAX_REQS));
  assign acc       = req_valid && req_ready;
  assign mem_en    = acc;
  assign mem_we    = acc && req.is_write;
  assign mem_addr  = req.addr;
  assign mem_wdata = req.data;

  always_comb begin
    ent.is_write = req.is_write;
    ent.due      = now + LATENCY;
    ent.r.tag    = req.tag;
    ent.r.data   = mem_rdata;
  end

  logic q_valid;
  sync_fifo #(.T(slot_t), .DEPTH(MAX_REQS)) u_q (
    .clk, .rst_n,
    .enq_valid(acc), .enq_ready(), .enq_data(ent),
    .deq_valid(q_valid), .deq_ready(done), .deq_data(head),
    .count(in_flight));

  assign done       = q_valid && (head.due == now);
  assign resp_valid = done && !head.is_write;
  assign resp       = head.r;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) now <= '0;
    else        now <= now + 1'b1;
  end

  // Requests complete strictly in order and exactly on time.
  assert property (@(posedge clk) disable iff (!rst_n) q_valid |-> head.due >= now);
endmodule
