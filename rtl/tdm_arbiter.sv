// tdm_arbiter: the round-robin arbiter in front of MI6's LLC pipeline.
//
// In cycle T only core T % N_CORES may put a message into the cache-access
// pipeline.  The slot advances every cycle whether or not its owner has
// anything to send, so whether a core gets into the pipeline never depends
// on what the other cores do (strong timing independence).  slot is the
// core owning the current cycle; grant is slot decoded and qualified with
// that core's request.  A request from a core outside its slot is simply
// not granted.  Reset puts the slot at core 0 (own choice).
module tdm_arbiter #(
  parameter int unsigned N_CORES = 2,
  localparam int unsigned CW = (N_CORES > 1) ? $clog2(N_CORES) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [N_CORES-1:0] req,
  output logic [CW-1:0]      slot,
  output logic [N_CORES-1:0] grant
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                        slot <= '0;
    else if (slot == CW'(N_CORES - 1)) slot <= '0;
    else                               slot <= slot + 1'b1;
  end

  always_comb begin
    grant = '0;
    grant[slot] = req[slot];
  end

  // At most one core is ever granted, and only in its own slot.
  assert property (@(posedge clk) disable iff (!rst_n) $onehot0(grant));
endmodule
