// Testbench helpers shared by the HeteroMem testbenches.
//
// pattern() is the content every memory line has before anything writes it: each 32-bit
// word holds the line's address (bits 33:6) and the word number, so data read back can be
// traced to the device line it came from.
package tb_pkg;
  import hm_pkg::*;

  function automatic line_t pattern(addr_t a);
    line_t l;
    for (int w = 0; w < 16; w++) l[w*32 +: 32] = {4'hA, w[3:0], 24'(a >> 6)};
    return l;
  endfunction
endpackage
