// sync_fifo: synchronous FIFO with valid/ready handshakes on both sides.
//
// Used for every link between the L1s and the LLC, and for the LLC's
// per-core upgrade-response queues (UQi) and its DRAM-request queue (DQ).
// Storage is a circular array with read/write pointers and an occupancy
// count.  enq is accepted in a cycle when enq_valid && enq_ready; deq_data
// shows the head combinationally and is removed when deq_valid && deq_ready.
// A full FIFO accepts no enqueue, even when it is dequeued in the same
// cycle.  Depths are parameters; the owner chooses them.
module sync_fifo #(
  parameter type         T     = logic [7:0],
  parameter int unsigned DEPTH = 2
) (
  input  logic clk,
  input  logic rst_n,
  input  logic enq_valid,
  output logic enq_ready,
  input  T     enq_data,
  output logic deq_valid,
  input  logic deq_ready,
  output T     deq_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  T mem [DEPTH];
  logic [PW-1:0] rd_ptr, wr_ptr;
  logic do_enq, do_deq;

  assign enq_ready = (count != DEPTH[$bits(count)-1:0]);
  assign deq_valid = (count != '0);
  assign deq_data  = mem[rd_ptr];
  assign do_enq    = enq_valid && enq_ready;
  assign do_deq    = deq_valid && deq_ready;

  function automatic logic [PW-1:0] bump(input logic [PW-1:0] p);
    return (p == PW'(DEPTH-1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_enq) wr_ptr <= bump(wr_ptr);
      if (do_deq) rd_ptr <= bump(rd_ptr);
      count <= count + $bits(count)'(do_enq) - $bits(count)'(do_deq);
    end
  end

  always_ff @(posedge clk) begin
    if (do_enq) mem[wr_ptr] <= enq_data;
  end
endmodule
