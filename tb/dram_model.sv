// dram_model: behavioural DRAM devices behind the DRAM controller's
// backing-store port.  Reads answer combinationally from the sparse store
// in tb_mem_pkg; a write updates it at the clock edge.  Not synthesizable.
module dram_model
  import mi6_pkg::*;
(
  input  logic       clk,
  input  logic       mem_en,
  input  logic       mem_we,
  input  line_addr_t mem_addr,
  input  line_data_t mem_wdata,
  output line_data_t mem_rdata
);
  // Sampled mid-cycle, after the address has settled and after any write
  // of the previous edge.
  always @(negedge clk) mem_rdata = tb_mem_pkg::dram_read(mem_addr);
  always @(posedge clk) begin
    if (mem_en && mem_we) tb_mem_pkg::dram[mem_addr] = mem_wdata;
  end
endmodule
