// tb_dram_ctrl: the controller at its defaults (120 cycles, 24 requests).
// Random reads and writes, sometimes in bursts that exceed 24 requests.
// Every read must answer exactly 120 cycles after it was accepted, in
// order, with its tag and with the data written by the latest earlier
// write; req_ready must drop exactly when 24 requests are in flight.
module tb_dram_ctrl;
  import mi6_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic req_valid, req_ready, resp_valid, mem_en, mem_we;
  dram_req_t req;
  dram_resp_t resp;
  line_addr_t mem_addr;
  line_data_t mem_wdata, mem_rdata;
  logic [4:0] in_flight;
  int checks = 0, failures = 0, n_bp = 0, n_rd = 0;
  typedef struct { longint due; logic [7:0] tag; line_data_t data; } exp_t;
  exp_t expq [$];
  line_data_t ref_mem [line_addr_t];
  longint cyc = 0;

  dram_ctrl dut (.clk, .rst_n, .req_valid, .req_ready, .req, .resp_valid, .resp,
    .mem_en, .mem_we, .mem_addr, .mem_wdata, .mem_rdata, .in_flight);
  dram_model u_mem (.clk, .mem_en, .mem_we, .mem_addr, .mem_wdata, .mem_rdata);

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0d: %s", cyc, what); end
  endtask

  int live = 0;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    // completions of this cycle
    if (resp_valid) begin
      check(expq.size() > 0 && expq[0].due == cyc, "response timing");
      if (expq.size() > 0) begin
        check(resp.tag == expq[0].tag, "response tag");
        check(resp.data == expq[0].data, "response data");
        void'(expq.pop_front());
      end
      n_rd++;
    end else begin
      check(expq.size() == 0 || expq[0].due != cyc, "missing response");
    end
    // requests accepted at this edge
    if (req_valid && req_ready) begin
      if (req.is_write) ref_mem[req.addr] = req.data;
      else begin
        exp_t x;
        x.due = cyc + 120;
        x.tag = req.tag;
        x.data = ref_mem.exists(req.addr) ? ref_mem[req.addr] : tb_mem_pkg::dram_read(req.addr);
        expq.push_back(x);
      end
    end
  end

  initial begin
    tb_mem_pkg::clear_all();
    req_valid = 0; req = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      req_valid = (i % 600 < 60) ? 1'b1 : (($urandom % 100) < 15);
      req.is_write = ($urandom % 3) == 0;
      req.addr = line_addr_t'($urandom % 16);
      req.tag  = 8'($urandom);
      req.data = {16{32'($urandom)}};
      #1;
      check(req_ready == (in_flight < 24), "ready vs in-flight");
      if (!req_ready) n_bp++;
      @(posedge clk);
    end
    req_valid = 0;
    repeat (200) @(posedge clk);
    check(expq.size() == 0, "reads never answered");
    check(n_bp > 0, "never back-pressured");
    check(n_rd > 100, "too few reads");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
