// tb_mem_pkg: shared state of the behavioural memory side of the
// testbenches.  dram holds the lines written to DRAM so far (a line never
// written reads as init_word(addr) repeated); golden holds the value of
// the last store to each line, the value any coherent reader must see.
// Lines are sixteen copies of one 32-bit word so a torn or stale line is
// easy to spot.
package tb_mem_pkg;
  import mi6_pkg::*;

  line_data_t dram   [line_addr_t];
  logic [31:0] golden [line_addr_t];

  function automatic logic [31:0] init_word(line_addr_t a);
    return (32'(a) * 32'h9e37_79b1) ^ 32'h0bad_cafe;
  endfunction

  function automatic line_data_t fill_line(logic [31:0] w);
    return {16{w}};
  endfunction

  function automatic line_data_t dram_read(line_addr_t a);
    if (dram.exists(a)) return dram[a];
    return fill_line(init_word(a));
  endfunction

  function automatic logic [31:0] golden_word(line_addr_t a);
    if (golden.exists(a)) return golden[a];
    return init_word(a);
  endfunction

  function automatic void clear_all();
    dram.delete();
    golden.delete();
  endfunction
endpackage
