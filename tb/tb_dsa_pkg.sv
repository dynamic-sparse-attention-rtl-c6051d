// tb_dsa_pkg: testbench helpers shared by the KV-cache testbenches: the data
// word the HBM model returns for a given token address and beat (so every
// checker can predict it), and nothing else.
package tb_dsa_pkg;
  import dsa_pkg::*;

  // Beat b of the token at byte address a: the 64-bit value {a, b} (a in the
  // upper 48 bits, b in the lower 16) repeated across the bus, with each
  // 64-bit lane rotated by its lane number so lanes differ.
  function automatic logic [BUS_W-1:0] hbm_word(logic [ADDR_W-1:0] a, int unsigned b);
    logic [BUS_W-1:0] r;
    logic [63:0] v;
    v = {a[47:0], 16'(b)};
    for (int l = 0; l < BUS_W/64; l++)
      r[l*64 +: 64] = (v << l) | (v >> (64 - l));
    return r;
  endfunction
endpackage
