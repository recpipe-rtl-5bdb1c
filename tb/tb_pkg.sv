// tb_pkg: helpers shared by the testbenches: the contents the DRAM model
// returns for an embedding line, so a testbench can predict any vector.
package tb_pkg;
  import rp_pkg::*;
  // byte i of line 'addr' = low 8 bits of (addr*7 + i*13 + 1), limited to
  // a small signed range so that sums stay far from saturation
  function automatic line_t dram_line(input emb_id_t addr);
    line_t l;
    for (int i = 0; i < LINE_BYTES; i++) begin
      automatic int v = (int'(addr) * 7 + i * 13 + 1) % 17;
      l[i*8 +: 8] = 8'(v - 8);
    end
    return l;
  endfunction
endpackage
