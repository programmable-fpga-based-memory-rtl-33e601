// tb_pkg: helpers shared by the testbenches: the initial contents of the
// modelled DRAM and a reference model of a DRAM line address split.
package tb_pkg;
  import mc_pkg::*;

  // every line of the modelled DRAM starts as sixteen 32-bit words
  // {line address, word number} mixed by a constant
  function automatic logic [MEM_DATA_W-1:0] line_init(input logic [MEM_ADDR_W-1:0] a);
    logic [MEM_DATA_W-1:0] l;
    for (int i = 0; i < MEM_DATA_W / 32; i++)
      l[i*32 +: 32] = (32'(a) * 32'd16 + 32'(i)) ^ 32'h5A5A_0000;
    return l;
  endfunction

  // expected 64-bit PE word at byte address ba in untouched memory
  function automatic logic [APP_DATA_W-1:0] word_init(input logic [APP_ADDR_W-1:0] ba);
    logic [MEM_DATA_W-1:0] l;
    l = line_init(line_mem_addr(ba));
    return l[ba[LINE_OFF_W-1:WORD_OFF_W]*APP_DATA_W +: APP_DATA_W];
  endfunction
endpackage
