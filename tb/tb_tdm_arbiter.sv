// tb_tdm_arbiter: with N = 3 cores and random requests, core c may be
// granted only in cycles T with T mod 3 = c, is always granted then if it
// asks, and the slot advances even when its owner is idle.
module tb_tdm_arbiter;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [2:0] req, grant;
  logic [1:0] slot;
  int checks = 0, failures = 0, idle = 0;

  tdm_arbiter #(.N_CORES(3)) dut (.clk, .rst_n, .req, .slot, .grant);

  initial begin
    req = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int t = 0; t < 600; t++) begin
      req = 3'($urandom);
      #1;
      checks++;
      if (slot != 2'(t % 3) || grant != (req & (3'b001 << (t % 3)))) begin
        failures++;
        $display("FAIL t=%0d slot=%0d req=%b grant=%b", t, slot, req, grant);
      end
      if (!req[t % 3]) idle++;
      @(negedge clk);
    end
    checks++;
    if (idle == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (2000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
