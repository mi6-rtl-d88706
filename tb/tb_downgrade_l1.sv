// tb_downgrade_l1: random pending masks for a 6-entry partition and 2
// cores; the request must be the lowest pending entry and, within it, the
// lowest pending core, with that entry's address and target state.
module tb_downgrade_l1;
  import mi6_pkg::*;
  logic [5:0][1:0] pending;
  line_addr_t [5:0] down_addr;
  msi_t [5:0] down_to;
  logic req_valid, req_core;
  logic [2:0] req_entry;
  line_addr_t req_addr;
  msi_t req_to;
  int checks = 0, failures = 0;

  downgrade_l1 #(.ENTRIES(6), .N_CORES(2)) dut (.pending, .down_addr, .down_to,
    .req_valid, .req_core, .req_entry, .req_addr, .req_to);

  initial begin
    for (int i = 0; i < 3000; i++) begin
      int ee, cc;
      for (int e = 0; e < 6; e++) begin
        pending[e]   = (($urandom % 4) == 0) ? 2'($urandom) : 2'b00;
        down_addr[e] = line_addr_t'($urandom);
        down_to[e]   = ($urandom % 2) ? MSI_S : MSI_I;
      end
      #1;
      ee = -1; cc = 0;
      for (int e = 5; e >= 0; e--) if (pending[e] != 0) ee = e;
      checks++;
      if (ee < 0) begin
        if (req_valid) begin failures++; $display("FAIL: spurious request"); end
      end else begin
        cc = pending[ee][0] ? 0 : 1;
        if (!req_valid || req_entry != 3'(ee) || req_core != 1'(cc) ||
            req_addr != down_addr[ee] || req_to != down_to[ee]) begin
          failures++;
          $display("FAIL: expected entry %0d core %0d", ee, cc);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
