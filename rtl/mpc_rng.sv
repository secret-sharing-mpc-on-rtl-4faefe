// mpc_rng: random number source for a party's PRF key.
//
// At startup every party draws a 128-bit key K_i and hands it to one other
// party.  The paper takes this generator from a third-party core and states
// that its security was not examined (a deployed system would use a PUF or a
// true hardware RNG).  This module is the simplest generator with the same
// role: a 128-bit Fibonacci LFSR with the maximal-length feedback polynomial
// x^128 + x^126 + x^101 + x^99 + 1, loaded with the non-zero SEED at reset and
// shifted by one bit per cycle.  It is not cryptographically secure; it only
// gives each party a distinct, repeatable key.
//
// Interface: after every 128 shifts the whole register has been renewed and
// rnd_valid pulses for one cycle with rnd = the register contents.  The
// first pulse comes 128 cycles after reset is released.
module mpc_rng #(
  parameter logic [127:0] SEED = 128'h0123_4567_89ab_cdef_fedc_ba98_7654_3210
) (
  input  logic         clk,
  input  logic         rst_n,
  output logic         rnd_valid,
  output logic [127:0] rnd
);
  logic [127:0] lfsr_q;
  logic [6:0]   cnt_q;
  logic         fb;

  // taps 128, 126, 101, 99 counted from 1 at the LSB end
  assign fb = lfsr_q[127] ^ lfsr_q[125] ^ lfsr_q[100] ^ lfsr_q[98];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lfsr_q    <= SEED;
      cnt_q     <= '0;
      rnd_valid <= 1'b0;
    end else begin
      lfsr_q    <= {lfsr_q[126:0], fb};
      cnt_q     <= cnt_q + 7'd1;
      rnd_valid <= (cnt_q == 7'd127);
    end
  end

  assign rnd = lfsr_q;

  initial assert (SEED != '0) else $error("mpc_rng: SEED must be non-zero");

endmodule
