// mpc_xor: one party's share of an XOR gate on SHARE_W bits at once.
//
// Because the one-time pad is homomorphic under XOR, the output share is the
// XOR of the two input shares, field by field: z_i = x_i ^ y_i and
// c_i = a_i ^ b_i.  No randomness and no communication are needed.  The unit
// is purely combinational; the party block registers its output.
module mpc_xor (
  input  mpc_pkg::share_t in0,   // (x_i, a_i)
  input  mpc_pkg::share_t in1,   // (y_i, b_i)
  output mpc_pkg::share_t out    // (z_i, c_i)
);
  always_comb begin
    out.x = in0.x ^ in1.x;
    out.a = in0.a ^ in1.a;
  end
endmodule
