// tb_util_pkg: test data shared by the testbenches. Off-chip memory contents
// and image pixels are pure functions of their address, so a testbench can
// recompute any weight without storing the whole parameter image.
//   weight word a, lane l : ((h(a, l) >> 8) mod 65) - 32, i.e. -0.125..+0.125
//   pixel  (t, i)         : ((h(t, i) >> 8) mod 513) - 256, i.e. -1.0..+1.0
// with h an integer multiplicative hash.
package tb_util_pkg;
  import m3vit_pkg::*;

  function automatic int unsigned hash2(input int unsigned a, input int unsigned b);
    int unsigned h;
    h = a * 32'd2654435761 + b * 32'd40503 + 32'd12345;
    h = h ^ (h >> 15);
    h = h * 32'd2246822519;
    h = h ^ (h >> 13);
    return h;
  endfunction

  function automatic data_t wgen(input int unsigned addr, input int unsigned lane);
    return data_t'(int'((hash2(addr, lane) >> 8) % 65) - 32);
  endfunction

  function automatic data_t pgen(input int unsigned t, input int unsigned i);
    return data_t'(int'((hash2(t + 32'h10000, i) >> 8) % 513) - 256);
  endfunction
endpackage
