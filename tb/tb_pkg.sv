// tb_pkg: helpers shared by the testbenches. pat() is the content the memory
// model returns for a line that was never written: every 32-bit word of the
// line holds the line address XOR the word number XOR a constant, so any
// line read from anywhere can be checked against its address.
package tb_pkg;
  import camdn_pkg::*;

  function automatic line_t pat(paddr_t a);
    line_t l;
    for (int w = 0; w < LINE_W/32; w++)
      l[w*32 +: 32] = {a[PADDR_W-1:OFF_W], OFF_W'(0)} ^ 32'(w) ^ 32'h5A5A_0000;
    return l;
  endfunction

  function automatic line_t rnd_line();
    line_t l;
    for (int w = 0; w < LINE_W/32; w++) l[w*32 +: 32] = $urandom;
    return l;
  endfunction
endpackage
