// tb_ref_pkg: reference arithmetic for the testbenches, written with plain
// wide-integer operators (%, *) so that it is independent of the Barrett
// and adder circuits under test.
package tb_ref_pkg;
  typedef logic [127:0] u128;

  function automatic u128 mulm(u128 a, u128 b, u128 q);
    return (a * b) % q;
  endfunction
  function automatic u128 addm(u128 a, u128 b, u128 q);
    return (a + b) % q;
  endfunction
  function automatic u128 subm(u128 a, u128 b, u128 q);
    return (a + q - b) % q;
  endfunction
  function automatic u128 powm(u128 a, u128 e, u128 q);
    u128 r = 1;
    u128 x = a % q;
    while (e != 0) begin
      if (e[0]) r = (r * x) % q;
      x = (x * x) % q;
      e = e >> 1;
    end
    return r;
  endfunction
  function automatic u128 invm(u128 a, u128 q);   // q prime
    return powm(a, q - 2, q);
  endfunction
  // Barrett constant floor(2^(2w)/q)
  function automatic u128 barrett_mu(u128 q, int w);
    u128 one = 1;
    return (one << (2 * w)) / q;
  endfunction
  function automatic int unsigned brev(int unsigned x, int bits);
    int unsigned r = 0;
    for (int k = 0; k < bits; k++) if (x[k]) r |= (1 << (bits - 1 - k));
    return r;
  endfunction
endpackage
