// nonspec_gate: rename throttle that turns off memory speculation in
// machine mode.
//
// In machine mode (the security monitor) MI6 does not let a memory
// instruction be renamed, and so enter the ROB, until the ROB is empty:
// the load or store then cannot be squashed and its address translation
// and access are never speculative.  The gate sits between decode and the
// WIDTH-wide rename stage.  It passes the in-order group of decoded
// instructions up to, not including, the first one it must hold:
//   * a memory instruction is held unless the ROB is empty and it is the
//     oldest instruction of the group (slot 0);
//   * once a memory instruction is renamed, the rest of the group waits.
// Outside machine mode every slot passes.  Purely combinational; the
// decision uses this cycle's ROB-empty flag.  Following the paper: "does
// not rename a memory instruction ... until the ROB is empty".  Own
// choice: holding the younger slots behind a renamed memory instruction.
module nonspec_gate #(
  parameter int unsigned WIDTH = 2
) (
  input  logic             priv_m,
  input  logic             rob_empty,
  input  logic [WIDTH-1:0] dec_valid,   // decoded instructions, slot 0 oldest
  input  logic [WIDTH-1:0] dec_is_mem,
  output logic [WIDTH-1:0] ren_fire,    // slots allowed to rename this cycle
  output logic             stalled      // a valid slot was held back
);
  always_comb begin
    logic blocked;
    blocked  = 1'b0;
    ren_fire = '0;
    for (int i = 0; i < WIDTH; i++) begin
      if (dec_valid[i] && !blocked) begin
        if (!priv_m) begin
          ren_fire[i] = 1'b1;
        end else if (dec_is_mem[i]) begin
          if (i == 0 && rob_empty) ren_fire[i] = 1'b1;
          blocked = 1'b1;
        end else begin
          ren_fire[i] = 1'b1;
        end
      end else begin
        blocked = 1'b1;
      end
    end
    stalled = (dec_valid & ~ren_fire) != '0;
  end
endmodule
