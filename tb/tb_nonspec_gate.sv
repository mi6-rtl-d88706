// tb_nonspec_gate: exhaustive check of the 2-wide rename throttle against
// a reference written from the rule: outside machine mode everything
// valid renames in order; in machine mode a memory instruction renames
// only as the oldest slot with an empty ROB, and nothing younger goes
// with it or past a held instruction.
module tb_nonspec_gate;
  logic priv_m, rob_empty, stalled;
  logic [1:0] dec_valid, dec_is_mem, ren_fire, exp_fire;
  int checks = 0, failures = 0, n_stall = 0;

  nonspec_gate dut (.priv_m, .rob_empty, .dec_valid, .dec_is_mem, .ren_fire, .stalled);

  initial begin
    for (int v = 0; v < 64; v++) begin
      {priv_m, rob_empty, dec_valid, dec_is_mem} = 6'(v);
      #1;
      exp_fire = 2'b00;
      if (!priv_m) exp_fire = (dec_valid == 2'b10) ? 2'b00 : dec_valid;
      else if (dec_valid[0]) begin
        if (dec_is_mem[0]) exp_fire = rob_empty ? 2'b01 : 2'b00;
        else begin
          exp_fire = 2'b01;
          if (dec_valid[1] && !dec_is_mem[1]) exp_fire = 2'b11;
        end
      end
      checks += 2;
      if (ren_fire != exp_fire) begin
        failures++;
        $display("FAIL v=%b fire=%b exp=%b", 6'(v), ren_fire, exp_fire);
      end
      if (stalled != ((dec_valid & ~exp_fire) != 0)) failures++;
      n_stall += int'(stalled);
    end
    checks++;
    if (n_stall == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
