// tb_ref_pkg: reference models shared by the testbenches.
//
// sfh_ref is a straight software rendering of SuperFastHash over a whole
// 256-byte line (byte i = bits [8i+7:8i], 16-bit halves little-endian),
// written independently of the RTL hash unit. mk_line makes a deterministic
// pseudo-random line from a seed, so equal seeds give duplicate lines.
package tb_ref_pkg;
  import caram_pkg::*;

  function automatic logic [31:0] sfh_ref(input line_t line);
    logic [31:0] h, tmp, lo, hi;
    h = 32'(LINE_BYTES);
    for (int i = 0; i < LINE_BYTES / 4; i++) begin
      lo  = {16'd0, line[32*i+8 +: 8], line[32*i +: 8]};
      hi  = {16'd0, line[32*i+24 +: 8], line[32*i+16 +: 8]};
      h   = h + lo;
      tmp = (hi << 11) ^ h;
      h   = (h << 16) ^ tmp;
      h   = h + (h >> 11);
    end
    h = h ^ (h << 3);
    h = h + (h >> 5);
    h = h ^ (h << 4);
    h = h + (h >> 17);
    h = h ^ (h << 25);
    h = h + (h >> 6);
    return h;
  endfunction

  function automatic line_t mk_line(input int unsigned seed);
    line_t       l;
    logic [31:0] x;
    x = seed * 32'h9E3779B9 + 32'h7F4A7C15;
    for (int i = 0; i < LINE_BITS / 32; i++) begin
      x = x ^ (x << 13);
      x = x ^ (x >> 17);
      x = x ^ (x << 5);
      l[32*i +: 32] = x;
    end
    return l;
  endfunction
endpackage
