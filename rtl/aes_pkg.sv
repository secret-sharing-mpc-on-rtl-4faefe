// aes_pkg: AES-128 building blocks (FIPS-197) used by the pipelined PRF.
//
// The S-box is not stored as a typed-in table: sbox_table() computes all 256
// entries at elaboration time from its definition, the multiplicative inverse
// in GF(2^8) modulo x^8+x^4+x^3+x+1 followed by the affine map
// b ^ rotl(b,1) ^ rotl(b,2) ^ rotl(b,3) ^ rotl(b,4) ^ 0x63.
// Blocks are 128-bit vectors with byte 0 of the FIPS-197 byte order in bits
// [127:120]; the state is column-major (byte 4*c + r is row r, column c).
package aes_pkg;

  typedef logic [127:0] block_t;

  function automatic logic [7:0] xtime(input logic [7:0] b);
    return {b[6:0], 1'b0} ^ (b[7] ? 8'h1b : 8'h00);
  endfunction

  function automatic logic [7:0] gmul(input logic [7:0] a, input logic [7:0] b);
    logic [7:0] p, aa;
    p  = '0;
    aa = a;
    for (int i = 0; i < 8; i++) begin
      if (b[i]) p ^= aa;
      aa = xtime(aa);
    end
    return p;
  endfunction

  function automatic logic [7:0] sbox_entry(input logic [7:0] v);
    logic [7:0] inv, sq, s;
    // inverse as v^254 (0 maps to 0)
    inv = 8'h01;
    sq  = v;
    for (int i = 0; i < 8; i++) begin
      if (i != 0) inv = gmul(inv, sq);   // exponent bits of 254 = 1111_1110
      sq = gmul(sq, sq);
    end
    s = inv ^ {inv[6:0], inv[7]} ^ {inv[5:0], inv[7:6]} ^ {inv[4:0], inv[7:5]}
        ^ {inv[3:0], inv[7:4]} ^ 8'h63;
    return s;
  endfunction

  // Entry v sits in bits [8*v +: 8].
  function automatic logic [2047:0] sbox_table();
    logic [2047:0] t;
    for (int v = 0; v < 256; v++) t[8*v +: 8] = sbox_entry(8'(v));
    return t;
  endfunction

  function automatic logic [7:0] get_byte(input block_t s, input int unsigned i);
    return s[127 - 8*i -: 8];
  endfunction

  // ShiftRows: row r of the output takes column (c + r) mod 4 of the input.
  function automatic block_t shift_rows(input block_t s);
    block_t o;
    for (int c = 0; c < 4; c++)
      for (int r = 0; r < 4; r++)
        o[127 - 8*(4*c + r) -: 8] = s[127 - 8*(4*((c + r) % 4) + r) -: 8];
    return o;
  endfunction

  function automatic block_t mix_columns(input block_t s);
    block_t o;
    logic [7:0] b0, b1, b2, b3;
    for (int c = 0; c < 4; c++) begin
      b0 = s[127 - 8*(4*c)     -: 8];
      b1 = s[127 - 8*(4*c + 1) -: 8];
      b2 = s[127 - 8*(4*c + 2) -: 8];
      b3 = s[127 - 8*(4*c + 3) -: 8];
      o[127 - 8*(4*c)     -: 8] = xtime(b0) ^ (xtime(b1) ^ b1) ^ b2 ^ b3;
      o[127 - 8*(4*c + 1) -: 8] = b0 ^ xtime(b1) ^ (xtime(b2) ^ b2) ^ b3;
      o[127 - 8*(4*c + 2) -: 8] = b0 ^ b1 ^ xtime(b2) ^ (xtime(b3) ^ b3);
      o[127 - 8*(4*c + 3) -: 8] = (xtime(b0) ^ b0) ^ b1 ^ b2 ^ xtime(b3);
    end
    return o;
  endfunction

  function automatic logic [7:0] rcon(input int unsigned round);
    logic [7:0] r;
    r = 8'h01;
    for (int unsigned i = 1; i < round; i++) r = xtime(r);
    return r;
  endfunction

endpackage
