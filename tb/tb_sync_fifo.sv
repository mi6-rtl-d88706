// tb_sync_fifo: random enqueue/dequeue on a depth-6 FIFO against a
// queue model; checks order, data, full/empty flags and the count.
module tb_sync_fifo;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic enq_valid, enq_ready, deq_valid, deq_ready;
  logic [7:0] enq_data, deq_data;
  logic [2:0] count;
  logic [7:0] model [$];
  int checks = 0, failures = 0, n_full = 0;

  sync_fifo #(.T(logic [7:0]), .DEPTH(6)) dut (.clk, .rst_n, .enq_valid, .enq_ready,
    .enq_data, .deq_valid, .deq_ready, .deq_data, .count);

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    enq_valid = 0; deq_ready = 0; enq_data = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      enq_valid = ($urandom % 100) < (i < 1500 ? 70 : 30);
      deq_ready = ($urandom % 100) < (i < 1500 ? 30 : 70);
      enq_data  = 8'($urandom);
      #1;
      check(count == 3'(model.size()), "count");
      check(enq_ready == (model.size() < 6), "full flag");
      check(deq_valid == (model.size() > 0), "empty flag");
      if (deq_valid) check(deq_data == model[0], "head data");
      if (!enq_ready) n_full++;
      @(posedge clk);
      if (deq_valid && deq_ready) void'(model.pop_front());
      if (enq_valid && enq_ready) model.push_back(enq_data);
    end
    check(n_full > 0, "never full");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (10000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
