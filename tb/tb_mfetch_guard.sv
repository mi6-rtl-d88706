// tb_mfetch_guard: after reset the range is [0, 64KB); then random ranges
// are programmed.  In machine mode a fetch is emitted only inside
// [base, base+size); outside machine mode every fetch is emitted.
module tb_mfetch_guard;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic priv_m, csr_we, fetch_valid, fetch_emit, fetch_fault;
  logic [30:0] csr_base, csr_size, fetch_pa;
  longint base, size;
  int checks = 0, failures = 0;

  mfetch_guard dut (.clk, .rst_n, .priv_m, .csr_we, .csr_base, .csr_size,
    .fetch_valid, .fetch_pa, .fetch_emit, .fetch_fault);

  task automatic probe(input logic [30:0] pa, input logic m);
    logic in;
    priv_m = m; fetch_valid = 1; fetch_pa = pa;
    #1;
    in = (longint'(pa) >= base) && (longint'(pa) < base + size);
    checks++;
    if (fetch_emit != (!m || in) || fetch_fault != (m && !in)) begin
      failures++;
      $display("FAIL pa=%h m=%0d base=%h size=%h", pa, m, base, size);
    end
  endtask

  initial begin
    priv_m = 1; csr_we = 0; csr_base = 0; csr_size = 0; fetch_valid = 0; fetch_pa = 0;
    base = 0; size = 64'h1_0000;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int i = 0; i < 300; i++) begin
      for (int k = 0; k < 6; k++) begin
        probe(31'($urandom), $urandom % 2);
        probe(31'(base + ($urandom % (size + 2))), 1'b1);
        probe(31'(base - 1), 1'b1);
        probe(31'(base + size), 1'b1);
      end
      @(negedge clk);
      csr_we = 1; priv_m = 1;
      csr_base = 31'($urandom) & 31'h7fff_f000;
      csr_size = 31'(1 + $urandom % 32'h0010_0000);
      if (longint'(csr_base) + longint'(csr_size) > 64'h7fff_ffff) csr_size = 31'h1000;
      @(posedge clk);
      base = csr_base; size = csr_size;
      @(negedge clk) csr_we = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
