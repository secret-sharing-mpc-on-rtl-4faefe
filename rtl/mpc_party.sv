// mpc_party: one compute party P_i of the three-party protocol (the paper's
// "1-party block").
//
// Start-up: the key RNG draws K_i 128 cycles after reset; K_i is offered to
// the previous party P_{i-1} on key_out (held for good), and K_{i+1} is
// taken from the next party on key_in.  Once both keys are held
// (keys_ready), the correlated-randomness unit starts filling its alpha
// buffer, so the PRF latency is paid only here, at initialisation.
//
// Operation: a gate request carries the party's two input shares and an
// opcode.  XOR is answered by the XOR unit in the cycle after the request,
// with no randomness and no communication.  AND goes to the AND unit, which
// takes one alpha, sends r_i to P_{i+1} on tx_* and takes r_{i-1} from the
// receive buffer fed by P_{i-1} on rx_*.  The receive buffer (RX_DEPTH
// entries) lets a party run ahead of its predecessor by that many ANDs and
// breaks the wait cycle that three parties all sending to each other would
// otherwise form.  One request is handled at a time.
//
// Following the paper: key generation and one-way key hand-over, one PRF per
// party, the gate equations, r_i sent to P_{i+1}.  This design's own choices:
// the valid/ready handshakes, the receive buffer, the opcode field, the
// statistics counters.
module mpc_party #(
  parameter logic [127:0] SEED        = 128'h0123_4567_89ab_cdef_fedc_ba98_7654_3210,
  parameter int unsigned  ALPHA_DEPTH = 16,
  parameter int unsigned  RX_DEPTH    = 4
) (
  input  logic                clk,
  input  logic                rst_n,
  // key hand-over
  output logic                key_out_valid,   // K_i to P_{i-1}
  output mpc_pkg::key_t       key_out,
  input  logic                key_in_valid,    // K_{i+1} from P_{i+1}
  input  mpc_pkg::key_t       key_in,
  output logic                keys_ready,
  // gate requests and results
  input  logic                req_valid,
  output logic                req_ready,
  input  mpc_pkg::gate_req_t  req,
  output logic                res_valid,
  output mpc_pkg::share_t     res,
  // r_i to P_{i+1}
  output logic                tx_valid,
  input  logic                tx_ready,
  output mpc_pkg::vec_t       tx_data,
  // r_{i-1} from P_{i-1}
  input  logic                rx_valid,
  output logic                rx_ready,
  input  mpc_pkg::vec_t       rx_data,
  // statistics
  output logic [31:0]         and_count,
  output logic [31:0]         xor_count,
  output logic [31:0]         alpha_count,
  output logic                alpha_stall,
  output logic                busy
);
  import mpc_pkg::*;

  // ---------------- keys
  logic   rnd_valid;
  key_t   rnd;
  logic   own_ok_q, next_ok_q;
  key_t   own_key_q, next_key_q;

  mpc_rng #(.SEED(SEED)) u_rng (.clk(clk), .rst_n(rst_n), .rnd_valid(rnd_valid), .rnd(rnd));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      own_ok_q  <= 1'b0;
      next_ok_q <= 1'b0;
    end else begin
      if (rnd_valid)    own_ok_q  <= 1'b1;
      if (key_in_valid) next_ok_q <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (rnd_valid && !own_ok_q)     own_key_q  <= rnd;
    if (key_in_valid && !next_ok_q) next_key_q <= key_in;
  end

  assign key_out_valid = own_ok_q;
  assign key_out       = own_key_q;
  assign keys_ready    = own_ok_q && next_ok_q;

  // ---------------- correlated randomness
  logic  alpha_valid, alpha_pop;
  vec_t  alpha;

  mpc_corr_rand #(.DEPTH(ALPHA_DEPTH)) u_corr (
    .clk        (clk),
    .rst_n      (rst_n),
    .keys_valid (keys_ready),
    .key_own    (own_key_q),
    .key_next   (next_key_q),
    .alpha_valid(alpha_valid),
    .alpha      (alpha),
    .alpha_pop  (alpha_pop),
    .stall      (alpha_stall),
    .alpha_count(alpha_count)
  );

  // ---------------- receive buffer for r_{i-1}
  logic  rxb_full, rxb_empty, rxb_pop;
  vec_t  rxb_data;
  logic [$clog2(RX_DEPTH+1)-1:0] rxb_count;

  mpc_fifo #(.W(SHARE_W), .DEPTH(RX_DEPTH)) u_rxbuf (
    .clk  (clk),
    .rst_n(rst_n),
    .push (rx_valid && rx_ready),
    .din  (rx_data),
    .pop  (rxb_pop),
    .dout (rxb_data),
    .full (rxb_full),
    .empty(rxb_empty),
    .count(rxb_count)
  );
  assign rx_ready = !rxb_full;

  // ---------------- gate units
  logic   and_req_valid, and_req_ready, and_res_valid, and_busy;
  share_t and_res, xor_out, xor_res_q;
  logic   xor_res_valid_q;

  assign and_req_valid = req_valid && (req.op == OP_AND) && !xor_res_valid_q;
  assign req_ready     = and_req_ready && !xor_res_valid_q;

  mpc_and_core u_and (
    .clk        (clk),
    .rst_n      (rst_n),
    .req_valid  (and_req_valid),
    .req_ready  (and_req_ready),
    .in0        (req.in0),
    .in1        (req.in1),
    .alpha_valid(alpha_valid),
    .alpha      (alpha),
    .alpha_pop  (alpha_pop),
    .tx_valid   (tx_valid),
    .tx_ready   (tx_ready),
    .tx_data    (tx_data),
    .rx_valid   (!rxb_empty),
    .rx_data    (rxb_data),
    .rx_pop     (rxb_pop),
    .res_valid  (and_res_valid),
    .res        (and_res),
    .busy       (and_busy)
  );

  mpc_xor u_xor (.in0(req.in0), .in1(req.in1), .out(xor_out));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      xor_res_valid_q <= 1'b0;
      and_count       <= '0;
      xor_count       <= '0;
    end else begin
      xor_res_valid_q <= req_valid && req_ready && (req.op == OP_XOR);
      if (req_valid && req_ready && (req.op == OP_XOR)) xor_count <= xor_count + 32'd1;
      if (and_res_valid)                                 and_count <= and_count + 32'd1;
    end
  end

  always_ff @(posedge clk) begin
    if (req_valid && req_ready && (req.op == OP_XOR)) xor_res_q <= xor_out;
  end

  assign busy      = and_busy || xor_res_valid_q;
  assign res_valid = and_res_valid || xor_res_valid_q;
  assign res       = xor_res_valid_q ? xor_res_q : and_res;

  assert property (@(posedge clk) disable iff (!rst_n) !(and_res_valid && xor_res_valid_q))
    else $error("mpc_party: AND and XOR results collide");

endmodule
