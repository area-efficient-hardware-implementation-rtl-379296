// tb_ref_pkg -- reference arithmetic for the testbenches: carry-less
// (GF(2)[x]) multiplication by shift-and-XOR, written independently of the
// RTL, and random wide words.
package tb_ref_pkg;
  typedef logic [511:0]  op_t;
  typedef logic [1023:0] prod_t;

  function automatic prod_t clmul(op_t a, op_t b);
    prod_t r;
    prod_t sa;
    r  = '0;
    sa = prod_t'(a);
    for (int i = 0; i < 512; i++) begin
      if (b[i]) r = r ^ sa;
      sa = sa << 1;
    end
    return r;
  endfunction

  // random value with the low `bits` bits random, the rest zero
  function automatic op_t rand_bits(int bits);
    op_t v;
    for (int i = 0; i < 16; i++) v[i*32 +: 32] = $urandom;
    return (bits >= 512) ? v : v & ((op_t'(1) << bits) - 1);
  endfunction
endpackage
