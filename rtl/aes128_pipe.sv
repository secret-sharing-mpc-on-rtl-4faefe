// aes128_pipe: fully pipelined AES-128 encryption, used as the PRF F_K(id).
//
// The paper evaluates its PRF (AES) once per cycle in counter mode and quotes
// a 21-clock-cycle pipeline delay for it.  This core reproduces that figure:
// one register for the initial AddRoundKey, then two registers per round for
// the ten rounds (SubBytes+ShiftRows and key-schedule step in the first,
// MixColumns+AddRoundKey in the second), 1 + 10*2 = 21.  The key travels down
// the pipeline with the data and is expanded on the fly, so every cycle may
// use a different key: the correlated-randomness generator relies on this to
// alternate between the two keys a party holds.  The internal split into
// stages is this design's choice; the paper used a third-party AES core whose
// insides it does not describe.
//
// Interface: in_valid/in_key/in_block/in_tag are sampled on a rising clock
// edge; 21 edges later out_valid/out_block/out_tag present the result for one
// cycle.  There is no back-pressure: the pipeline always advances.  in_tag is
// a user field carried alongside the block unchanged.
module aes128_pipe #(
  parameter int unsigned TAG_W = 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  aes_pkg::block_t    in_key,
  input  aes_pkg::block_t    in_block,
  input  logic [TAG_W-1:0]   in_tag,
  output logic               out_valid,
  output aes_pkg::block_t    out_block,
  output logic [TAG_W-1:0]   out_tag
);
  import aes_pkg::*;

  localparam int unsigned ROUNDS  = 10;
  localparam int unsigned LATENCY = 1 + 2 * ROUNDS;   // 21, as in the paper
  localparam logic [2047:0] SBOX  = sbox_table();

  function automatic logic [7:0] sb(input logic [7:0] b);
    return SBOX[8*b +: 8];
  endfunction

  function automatic block_t sub_bytes(input block_t s);
    block_t o;
    for (int i = 0; i < 16; i++) o[8*i +: 8] = sb(s[8*i +: 8]);
    return o;
  endfunction

  // One step of the AES-128 key schedule.
  function automatic block_t next_key(input block_t k, input logic [7:0] rc);
    logic [31:0] w0, w1, w2, w3, t;
    {w0, w1, w2, w3} = k;
    t  = {sb(w3[23:16]) ^ rc, sb(w3[15:8]), sb(w3[7:0]), sb(w3[31:24])};
    w0 = w0 ^ t;
    w1 = w1 ^ w0;
    w2 = w2 ^ w1;
    w3 = w3 ^ w2;
    return {w0, w1, w2, w3};
  endfunction

  // Stage registers: index 0 is the AddRoundKey stage, 2r-1 and 2r the two
  // halves of round r.
  block_t             st_q  [LATENCY];
  block_t             key_q [LATENCY];
  logic [TAG_W-1:0]   tag_q [LATENCY];
  logic [LATENCY-1:0] vld_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vld_q <= '0;
    else        vld_q <= {vld_q[LATENCY-2:0], in_valid};
  end

  always_ff @(posedge clk) begin
    st_q[0]  <= in_block ^ in_key;
    key_q[0] <= in_key;
    tag_q[0] <= in_tag;
    for (int unsigned r = 1; r <= ROUNDS; r++) begin
      // first half: SubBytes, ShiftRows, next round key
      st_q[2*r-1]  <= shift_rows(sub_bytes(st_q[2*r-2]));
      key_q[2*r-1] <= next_key(key_q[2*r-2], rcon(r));
      tag_q[2*r-1] <= tag_q[2*r-2];
      // second half: MixColumns (not in the last round), AddRoundKey
      st_q[2*r]    <= ((r == ROUNDS) ? st_q[2*r-1] : mix_columns(st_q[2*r-1]))
                      ^ key_q[2*r-1];
      key_q[2*r]   <= key_q[2*r-1];
      tag_q[2*r]   <= tag_q[2*r-1];
    end
  end

  assign out_valid = vld_q[LATENCY-1];
  assign out_block = st_q[LATENCY-1];
  assign out_tag   = tag_q[LATENCY-1];

endmodule
