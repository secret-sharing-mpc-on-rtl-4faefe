// mpc_fifo: small synchronous FIFO used as the alpha buffer between the
// correlated-randomness generator and the AND unit, and as the receive buffer
// for R values arriving from the previous party.
//
// Circular buffer of DEPTH words (DEPTH a power of two).  push writes din at
// the tail, pop advances the head; dout always shows the head word.  Both may
// happen in the same cycle.  Pushing when full or popping when empty is a
// protocol error and is flagged by an assertion.  Reset empties the FIFO.
module mpc_fifo #(
  parameter int unsigned W     = 128,
  parameter int unsigned DEPTH = 4
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       push,
  input  logic [W-1:0]               din,
  input  logic                       pop,
  output logic [W-1:0]               dout,
  output logic                       full,
  output logic                       empty,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] rd_q, wr_q;
  logic [$clog2(DEPTH+1)-1:0] cnt_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_q  <= '0;
      wr_q  <= '0;
      cnt_q <= '0;
    end else begin
      if (push) wr_q <= (wr_q == AW'(DEPTH - 1)) ? '0 : wr_q + AW'(1);
      if (pop)  rd_q <= (rd_q == AW'(DEPTH - 1)) ? '0 : rd_q + AW'(1);
      case ({push, pop})
        2'b10:   cnt_q <= cnt_q + 1'b1;
        2'b01:   cnt_q <= cnt_q - 1'b1;
        default: cnt_q <= cnt_q;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wr_q] <= din;
  end

  assign dout  = mem[rd_q];
  assign count = cnt_q;
  assign full  = (cnt_q == ($clog2(DEPTH+1))'(DEPTH));
  assign empty = (cnt_q == '0);

  assert property (@(posedge clk) disable iff (!rst_n) !(push && full && !pop))
    else $error("mpc_fifo: push while full");
  assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty))
    else $error("mpc_fifo: pop while empty");

endmodule
