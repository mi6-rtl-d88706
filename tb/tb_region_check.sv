// tb_region_check: programs random region bitvectors (in machine mode and,
// ignored, outside it) and checks random physical accesses: emitted iff
// the region bit of PA[30:25] is set, faulted otherwise, and bv_changed
// pulses after each machine-mode write.
module tb_region_check;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic priv_m, csr_we, bv_changed, acc_valid, emit, fault;
  logic [63:0] csr_wdata, allowed, model;
  logic [30:0] acc_pa;
  int checks = 0, failures = 0;

  region_check dut (.clk, .rst_n, .priv_m, .csr_we, .csr_wdata, .allowed, .bv_changed,
    .acc_valid, .acc_pa, .emit, .fault);

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    priv_m = 0; csr_we = 0; csr_wdata = 0; acc_valid = 0; acc_pa = 0; model = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int i = 0; i < 400; i++) begin
      logic wrote;
      @(negedge clk);
      csr_we = ($urandom % 4) == 0;
      priv_m = $urandom % 2;
      csr_wdata = {32'($urandom), 32'($urandom)};
      wrote = csr_we && priv_m;
      @(posedge clk);
      if (wrote) model = csr_wdata;
      @(negedge clk);
      csr_we = 0;
      check(bv_changed == wrote, "bv_changed");
      check(allowed == model, "bitvector");
      for (int k = 0; k < 8; k++) begin
        acc_valid = $urandom % 2;
        acc_pa = 31'($urandom);
        #1;
        check(emit == (acc_valid && model[acc_pa[30:25]]), "emit");
        check(fault == (acc_valid && !model[acc_pa[30:25]]), "fault");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
