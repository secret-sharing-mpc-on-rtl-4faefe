// tb_mpc_party: three party blocks wired into the protocol ring (keys go to
// the previous party, r values to the next).  The testbench shares random
// secrets among them, issues AND and XOR gates, reconstructs the outputs and
// compares with v & w and v ^ w.  It checks the key hand-over at start-up,
// the 6-cycle spacing of back-to-back ANDs, the one-cycle XOR, and gates
// issued to the three parties at different times (receive buffer in use).
module tb_mpc_party;
  import mpc_pkg::*;
  import tb_mpc_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic      kov[3], krdy[3], req_valid[3], req_ready[3], res_valid[3];
  key_t      ko[3];
  gate_req_t req[3];
  share_t    res[3];
  logic      tx_valid[3], tx_ready[3], rx_ready[3], astall[3], busy[3];
  vec_t      tx_data[3];
  logic [31:0] nand_[3], nxor[3], nalpha[3];
  int checks = 0, failures = 0;

  for (genvar i = 0; i < 3; i++) begin : g_p
    mpc_party #(.SEED(128'h1234_0000_0000_0000_0000_0000_0000_0001 + 128'(i * 977))) dut (
      .clk, .rst_n,
      .key_out_valid(kov[i]), .key_out(ko[i]),
      .key_in_valid(kov[(i+1)%3]), .key_in(ko[(i+1)%3]), .keys_ready(krdy[i]),
      .req_valid(req_valid[i]), .req_ready(req_ready[i]), .req(req[i]),
      .res_valid(res_valid[i]), .res(res[i]),
      .tx_valid(tx_valid[i]), .tx_ready(tx_ready[i]), .tx_data(tx_data[i]),
      .rx_valid(tx_valid[(i+2)%3]), .rx_ready(rx_ready[i]), .rx_data(tx_data[(i+2)%3]),
      .and_count(nand_[i]), .xor_count(nxor[i]), .alpha_count(nalpha[i]),
      .alpha_stall(astall[i]), .busy(busy[i]));
    assign tx_ready[i] = rx_ready[(i+1)%3];
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  share_t got[3];
  int ndone[3] = '{0, 0, 0};
  int accept_cyc[$], res_cyc[$];
  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < 3; i++) if (res_valid[i]) begin got[i] = res[i]; ndone[i]++; end
    if (res_valid[0]) res_cyc.push_back(cyc);
    if (req_valid[0] && req_ready[0] && req[0].op == OP_AND) accept_cyc.push_back(cyc);
  end

  // drive one gate into party i after `delay` cycles
  task automatic drive(input int i, input int delay, input mpc_op_e op,
                       input share_t a, input share_t b);
    repeat (delay) @(posedge clk);
    @(negedge clk);
    req[i].op = op; req[i].in0 = a; req[i].in1 = b; req_valid[i] = 1;
    do @(posedge clk); while (!req_ready[i]);
    #1 req_valid[i] = 0;
  endtask

  task automatic gate(input mpc_op_e op, input bit skew);
    vec_t v, w, e;
    share_t s0[3], s1[3];
    int n0;
    v = rand_vec(); w = rand_vec();
    share(v, s0); share(w, s1);
    e = (op == OP_AND) ? (v & w) : (v ^ w);
    n0 = ndone[0];
    fork
      drive(0, skew ? int'($urandom_range(0, 12)) : 0, op, s0[0], s1[0]);
      drive(1, skew ? int'($urandom_range(0, 12)) : 0, op, s0[1], s1[1]);
      drive(2, skew ? int'($urandom_range(0, 12)) : 0, op, s0[2], s1[2]);
    join
    while (!(ndone[0] > n0 && ndone[1] > n0 && ndone[2] > n0)) @(posedge clk);
    #1;
    check(reconstruct(got) == e, $sformatf("%s value", op.name()));
    check(well_formed(got, e), $sformatf("%s sharing", op.name()));
  endtask

  initial begin
    int t_rst;
    bit gaps_ok;
    foreach (req_valid[i]) begin req_valid[i] = 0; req[i] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1; t_rst = cyc;
    wait (krdy[0] && krdy[1] && krdy[2]);
    check(cyc - t_rst == 130, $sformatf("keys ready after %0d cycles", cyc - t_rst));
    check(ko[0] != ko[1] && ko[1] != ko[2] && ko[0] != ko[2], "distinct keys");
    // XOR answers in the next cycle
    gate(OP_XOR, 0);
    // let the alpha buffers fill, then back-to-back ANDs
    repeat (60) @(posedge clk);
    check(astall[0], "alpha generator stalls on a full buffer");
    accept_cyc.delete();
    res_cyc.delete();
    for (int k = 0; k < 8; k++) gate(OP_AND, 0);
    gaps_ok = (accept_cyc.size() == 8) && (res_cyc.size() == 8);
    // accepted on one edge, result seen on the sixth edge after it: the unit
    // can accept the next AND there, 6 cycles per operation
    for (int k = 0; k < 8 && gaps_ok; k++)
      if (res_cyc[k] - accept_cyc[k] != 6) begin gaps_ok = 0; $display("busy %0d", res_cyc[k] - accept_cyc[k]); end
    check(gaps_ok, "6 cycles per AND");
    // mixed and skewed
    for (int k = 0; k < 40; k++) gate(($urandom_range(0, 1) != 0) ? OP_AND : OP_XOR, 1);
    check(nand_[0] == nand_[1] && nand_[1] == nand_[2], "AND counts agree");
    check(nxor[0] == 1 + 40 - nand_[0] + 8, "XOR count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
