// mpc_corr_rand: correlated-randomness generator of one party.
//
// Party P_i holds its own key K_i and the key K_{i+1} of the next party.  For
// each counter value id it evaluates the PRF twice, F_{K_i}(id) and
// F_{K_{i+1}}(id), and XORs the pair into
//     alpha_i(id) = F_{K_i}(id) ^ F_{K_{i+1}}(id).
// Summed over the three parties every key appears twice, so
// alpha_1 ^ alpha_2 ^ alpha_3 = 0 while each alpha_i looks random to the
// other parties.  As in the paper there is a single PRF instance per party,
// evaluated alternately with the two keys on the same counter; since the
// keys are fixed after start-up the 21-cycle PRF latency is seen only once,
// after which one alpha leaves every two cycles.
//
// Choices of this design: the counter starts at 0 and counts up by one per
// alpha; finished values wait in a DEPTH-entry FIFO, and a new counter value
// is started only while FIFO entries plus values in flight are fewer than
// DEPTH, so the generator stalls instead of overflowing.  All three parties
// consume alphas in the same order (one per AND), so alpha number k of every
// party belongs to the same counter value.
//
// Interface: keys_valid enables generation (keys sampled continuously, they
// must stay stable while it is high).  alpha_valid/alpha show the FIFO head;
// alpha_pop removes it.  stall is high in a cycle where a new pair could not
// be started because the buffer was full.
module mpc_corr_rand #(
  parameter int unsigned DEPTH = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 keys_valid,
  input  mpc_pkg::key_t        key_own,    // K_i
  input  mpc_pkg::key_t        key_next,   // K_{i+1}
  output logic                 alpha_valid,
  output mpc_pkg::vec_t        alpha,
  input  logic                 alpha_pop,
  output logic                 stall,
  output logic [31:0]          alpha_count
);
  import mpc_pkg::*;

  localparam int unsigned CW = $clog2(DEPTH + 1) + 1;

  logic         phase_q;       // 0: next issue uses K_i, 1: uses K_{i+1}
  logic [127:0] ctr_q;         // counter-mode input (the paper's ID)
  logic [CW-1:0] reserved_q;   // FIFO entries plus pairs in flight
  logic         issue0, issue1;

  logic         prf_valid;
  logic [127:0] prf_out;
  logic [0:0]   prf_tag;
  logic [127:0] first_q;       // F_{K_i}(id) waiting for its partner

  logic         fifo_push, fifo_full, fifo_empty;
  logic [$clog2(DEPTH+1)-1:0] fifo_count;

  assign issue0 = keys_valid && !phase_q && (reserved_q < CW'(DEPTH));
  assign issue1 = phase_q;
  assign stall  = keys_valid && !phase_q && !(reserved_q < CW'(DEPTH));

  aes128_pipe #(.TAG_W(1)) u_prf (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (issue0 || issue1),
    .in_key   (phase_q ? key_next : key_own),
    .in_block (ctr_q),
    .in_tag   (phase_q),
    .out_valid(prf_valid),
    .out_block(prf_out),
    .out_tag  (prf_tag)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase_q     <= 1'b0;
      ctr_q       <= '0;
      reserved_q  <= '0;
      alpha_count <= '0;
    end else begin
      if (issue0) phase_q <= 1'b1;
      if (issue1) begin
        phase_q <= 1'b0;
        ctr_q   <= ctr_q + 128'd1;
      end
      reserved_q <= reserved_q + (issue0 ? CW'(1) : CW'(0))
                               - (alpha_pop ? CW'(1) : CW'(0));
      if (fifo_push) alpha_count <= alpha_count + 32'd1;
    end
  end

  always_ff @(posedge clk) begin
    if (prf_valid && !prf_tag[0]) first_q <= prf_out;
  end

  assign fifo_push = prf_valid && prf_tag[0];

  mpc_fifo #(.W(SHARE_W), .DEPTH(DEPTH)) u_buf (
    .clk  (clk),
    .rst_n(rst_n),
    .push (fifo_push),
    .din  (first_q ^ prf_out),
    .pop  (alpha_pop),
    .dout (alpha),
    .full (fifo_full),
    .empty(fifo_empty),
    .count(fifo_count)
  );

  assign alpha_valid = !fifo_empty;

  assert property (@(posedge clk) disable iff (!rst_n) fifo_push |-> !fifo_full || alpha_pop)
    else $error("mpc_corr_rand: alpha buffer overflow");
  assert property (@(posedge clk) disable iff (!rst_n)
                   reserved_q >= CW'(fifo_count))
    else $error("mpc_corr_rand: reservation count below occupancy");

endmodule
