// camp_tb_pkg -- reference model shared by the CAMP testbenches.
//
// Works directly from the matrix definition, not from the hardware's
// multiplier numbering: A is a 4xK tile stored column-major (element
// k*4 + r), B is a Kx4 tile stored row-major (element k*4 + c), element e of
// a register at bits [w*e +: w] for w = 8 or 4, two's complement. The
// result tile is returned column-major (index c*4 + r), wrapped to 32 bits.
package camp_tb_pkg;

  typedef int tile_t [16];

  function automatic int elem(logic [511:0] v, int e, bit int4);
    if (int4) return int'($signed(v[4*e +: 4]));
    else      return int'($signed(v[8*e +: 8]));
  endfunction

  // C = A * B over k = k0 .. k0+kn-1.
  function automatic tile_t ref_tile(logic [511:0] a, logic [511:0] b,
                                     bit int4, int k0, int kn);
    tile_t c;
    for (int i = 0; i < 16; i++) c[i] = 0;
    for (int k = k0; k < k0 + kn; k++)
      for (int r = 0; r < 4; r++)
        for (int cc = 0; cc < 4; cc++)
          c[cc*4 + r] += elem(a, k*4 + r, int4) * elem(b, k*4 + cc, int4);
    return c;
  endfunction

  function automatic logic [511:0] rand_vec();
    logic [511:0] v;
    for (int i = 0; i < 16; i++) v[32*i +: 32] = $urandom;
    return v;
  endfunction

endpackage
