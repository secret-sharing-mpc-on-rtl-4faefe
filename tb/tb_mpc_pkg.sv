// tb_mpc_pkg: reference model of the data holder and of the output party,
// used by the testbenches to create inputs and to check results.
//
// share():       split a 128-bit vector of secret bits v into the three
//                parties' shares: x_1, x_2 random, x_3 = x_1 ^ x_2 (so the
//                x's XOR to 0) and a_i = x_{i-1} ^ v (indices mod 3).
// reconstruct(): v = a_1 ^ a_2 ^ a_3.
// well_formed(): the x parts XOR to 0 and a_i = x_{i-1} ^ v for all i.
// Parties are numbered 0, 1, 2 here (the protocol text numbers them 1..3).
package tb_mpc_pkg;
  import mpc_pkg::*;

  function automatic vec_t rand_vec();
    vec_t v;
    for (int i = 0; i < SHARE_W / 32; i++) v[32*i +: 32] = $urandom();
    return v;
  endfunction

  function automatic void share(input vec_t v, output share_t s[3]);
    vec_t x[3];
    x[0] = rand_vec();
    x[1] = rand_vec();
    x[2] = x[0] ^ x[1];
    for (int i = 0; i < 3; i++) begin
      s[i].x = x[i];
      s[i].a = x[(i + 2) % 3] ^ v;
    end
  endfunction

  function automatic vec_t reconstruct(input share_t s[3]);
    return s[0].a ^ s[1].a ^ s[2].a;
  endfunction

  function automatic bit well_formed(input share_t s[3], input vec_t v);
    bit ok;
    ok = ((s[0].x ^ s[1].x ^ s[2].x) == '0);
    for (int i = 0; i < 3; i++) ok &= (s[i].a == (s[(i + 2) % 3].x ^ v));
    return ok;
  endfunction
endpackage
