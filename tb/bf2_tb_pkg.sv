// bf2_tb_pkg: reference models shared by the testbenches.
//
// ref_h3 recomputes an H3 hash from its definition (XOR of the matrix rows
// picked by the 1 bits of the key), with the matrix rows generated by its
// own xorshift32 code (state s; s ^= s<<13; s ^= s>>17; s ^= s<<5, four
// steps from seed*0x9E3779B9 + (row+1)*0x85EBCA6B, 1 if that is zero).
package bf2_tb_pkg;

  function automatic int unsigned ref_xs(input int unsigned s);
    int unsigned a;
    a = s;
    a = a ^ (a << 13);
    a = a ^ (a >> 17);
    a = a ^ (a << 5);
    return a;
  endfunction

  function automatic int unsigned ref_qrow(input int unsigned seed, input int unsigned r);
    int unsigned s;
    s = seed * 32'h9E3779B9 + (r + 1) * 32'h85EBCA6B;
    if (s == 0) s = 1;
    repeat (4) s = ref_xs(s);
    return s;
  endfunction

  function automatic int unsigned ref_h3(input int unsigned seed, input int unsigned key,
                                         input int unsigned key_w, input int unsigned out_w);
    int unsigned h;
    h = 0;
    for (int unsigned r = 0; r < key_w; r++)
      if ((key >> r) & 1) h = h ^ ref_qrow(seed, r);
    return h & ((1 << out_w) - 1);
  endfunction

  // Bit index of hash i (0-based) for pixel (x,y) with 9-bit coordinates.
  function automatic int unsigned ref_idx(input int unsigned i, input int unsigned x,
                                          input int unsigned y, input int unsigned out_w);
    return ref_h3(i + 1, (y << 9) | x, 18, out_w);
  endfunction

endpackage
