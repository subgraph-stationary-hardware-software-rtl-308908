// sushi_tb_pkg: reference functions shared by the testbenches.
//
// dram_byte() defines the contents of the modelled off-chip memory (a hash
// of beat address and byte index, so no storage is needed), and
// requant_ref() is an independent statement of the output requantisation:
// clamp(((acc*scale + 2^(shift-1)) >> shift) + zp) to int8.
package sushi_tb_pkg;
  function automatic logic [7:0] dram_byte(input logic [31:0] addr, input int unsigned idx);
    logic [31:0] h;
    h = addr * 32'd2654435761 ^ (32'(idx) * 32'd40503 + 32'd12345);
    h = h ^ (h >> 13);
    return h[7:0];
  endfunction

  function automatic int requant_ref(input longint acc, input longint scale,
                                     input int zp, input int shift);
    longint v;
    v = (acc * scale + (longint'(1) << (shift - 1))) >>> shift;
    v = v + zp;
    if (v > 127) v = 127;
    if (v < -128) v = -128;
    return int'(v);
  endfunction
endpackage
