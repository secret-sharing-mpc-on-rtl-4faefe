// mpc_and_core: one party's share of an AND gate on SHARE_W bits at once
// (the paper's "MPC AND module", 128 Boolean ANDs per operation).
//
// With inputs (x_i, a_i), (y_i, b_i) and a correlated random value alpha_i,
// party P_i computes
//     r_i = (x_i & y_i) ^ (a_i & b_i) ^ alpha_i
// and sends r_i to the next party P_{i+1}.  The three r values XOR to the AND
// of the secrets.  When r_{i-1} arrives from the previous party the output
// share in the (z, c) format is rebuilt as
//     z_i = r_i ^ r_{i-1},   c_i = r_i.
// (c_i = r_i = z_{i-1} ^ v&w, so the output keeps the invariant of the
// input sharing.)
//
// The paper gives the gate equations and says the implemented unit needs
// 6 clock cycles between operations.  The split of those six cycles is this
// design's choice, one state per step of the gate:
//   IDLE  accept operands            ALPHA take alpha_i from the buffer
//   CALC  r_i = 3-input XOR          TX    offer r_i to P_{i+1}
//   RX    take r_{i-1}               FIN   register z_i, c_i
// so a new request is accepted every 6 cycles when alpha is waiting and the
// neighbours keep up; ALPHA, TX and RX wait as long as their partner is not
// ready.
//
// Interfaces (all valid/ready, a transfer happens when both are high):
// req_* operands in, alpha_* from the correlated-randomness buffer (pop
// style: alpha_pop is high for the cycle that consumes the head), tx_* to the
// next party, rx_* from the previous party's receive buffer (pop style),
// res_valid pulses for one cycle with the result.
module mpc_and_core (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            req_valid,
  output logic            req_ready,
  input  mpc_pkg::share_t in0,        // (x_i, a_i)
  input  mpc_pkg::share_t in1,        // (y_i, b_i)
  input  logic            alpha_valid,
  input  mpc_pkg::vec_t   alpha,
  output logic            alpha_pop,
  output logic            tx_valid,
  input  logic            tx_ready,
  output mpc_pkg::vec_t   tx_data,    // r_i to P_{i+1}
  input  logic            rx_valid,
  input  mpc_pkg::vec_t   rx_data,    // r_{i-1} from P_{i-1}
  output logic            rx_pop,
  output logic            res_valid,
  output mpc_pkg::share_t res,        // (z_i, c_i)
  output logic            busy
);
  import mpc_pkg::*;

  typedef enum logic [2:0] {
    S_IDLE, S_ALPHA, S_CALC, S_TX, S_RX, S_FIN
  } state_e;

  state_e state_q;
  share_t in0_q, in1_q;
  vec_t   alpha_q, r_q, rprev_q;

  assign req_ready = (state_q == S_IDLE);
  assign alpha_pop = (state_q == S_ALPHA) && alpha_valid;
  assign tx_valid  = (state_q == S_TX);
  assign tx_data   = r_q;
  assign rx_pop    = (state_q == S_RX) && rx_valid;
  assign busy      = (state_q != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q   <= S_IDLE;
      res_valid <= 1'b0;
    end else begin
      res_valid <= 1'b0;
      unique case (state_q)
        S_IDLE:  if (req_valid)   state_q <= S_ALPHA;
        S_ALPHA: if (alpha_valid) state_q <= S_CALC;
        S_CALC:                   state_q <= S_TX;
        S_TX:    if (tx_ready)    state_q <= S_RX;
        S_RX:    if (rx_valid)    state_q <= S_FIN;
        S_FIN: begin
          state_q   <= S_IDLE;
          res_valid <= 1'b1;
        end
        default:                  state_q <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (req_ready && req_valid) begin
      in0_q <= in0;
      in1_q <= in1;
    end
    if (alpha_pop) alpha_q <= alpha;
    if (state_q == S_CALC) r_q <= (in0_q.x & in1_q.x) ^ (in0_q.a & in1_q.a) ^ alpha_q;
    if (rx_pop) rprev_q <= rx_data;
    if (state_q == S_FIN) begin
      res.x <= r_q ^ rprev_q;
      res.a <= r_q;
    end
  end

  // valid/ready rule: an offered r_i stays offered, unchanged, until taken
  assert property (@(posedge clk) disable iff (!rst_n)
                   tx_valid && !tx_ready |=> tx_valid && $stable(tx_data))
    else $error("mpc_and_core: tx dropped before it was accepted");

endmodule
