// tb_ref_pkg: reference models used by the testbenches.
//
// Written from the design's specification (not by reusing the RTL):
//   ROM bit (row, col) of array `seed`: h = row*0x9E3779B1 ^ col*0x85EBCA77 ^
//   seed*0xC2B2AE3D (32-bit), h ^= h>>15, h *= 0x2C1B3C6D, h ^= h>>12, bit = h[7].
//   Weight o of a row is the two's-complement byte in columns 8o..8o+7
//   (column 8o+b holds bit b).
package tb_ref_pkg;
  function automatic bit ref_rom_bit(int unsigned seed, int unsigned row, int unsigned col);
    bit [31:0] h;
    h = (row * 32'h9E3779B1) ^ (col * 32'h85EBCA77) ^ (seed * 32'hC2B2AE3D);
    h = h ^ (h >> 15);
    h = h * 32'h2C1B3C6D;
    h = h ^ (h >> 12);
    return h[7];
  endfunction

  function automatic int ref_rom_w(int unsigned seed, int unsigned row, int unsigned o);
    int v = 0;
    for (int b = 0; b < 8; b++) if (ref_rom_bit(seed, row, 8*o + b)) v += (b == 7) ? -128 : (1 << b);
    return v;
  endfunction

  // value of an 8-bit activation
  function automatic int ref_act(bit [7:0] a, bit is_signed);
    return is_signed ? int'($signed(a)) : int'(a);
  endfunction
endpackage
