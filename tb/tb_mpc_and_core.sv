// tb_mpc_and_core: three AND units wired as the three parties of one gate.
// The testbench plays the data holder (shares random v, w), supplies
// correlated alphas (random, XOR to zero) and carries each r_i to the next
// party through a queue.  It checks that the outputs reconstruct to v & w and
// keep the sharing invariant, that an operation takes 6 cycles from one
// accepted request to the next when nothing waits, and that the unit holds
// correctly when alpha or the neighbour's r arrive late.
module tb_mpc_and_core;
  import mpc_pkg::*;
  import tb_mpc_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic   req_valid[3], req_ready[3], av[3], apop[3];
  logic   tx_valid[3], tx_ready[3], rx_valid[3], rx_pop[3], res_valid[3], busy[3];
  share_t in0[3], in1[3], res[3];
  vec_t   alpha[3], tx_data[3], rx_data[3];
  int checks = 0, failures = 0;

  for (genvar i = 0; i < 3; i++) begin : g_p
    mpc_and_core dut (
      .clk, .rst_n, .req_valid(req_valid[i]), .req_ready(req_ready[i]),
      .in0(in0[i]), .in1(in1[i]),
      .alpha_valid(av[i]), .alpha(alpha[i]), .alpha_pop(apop[i]),
      .tx_valid(tx_valid[i]), .tx_ready(tx_ready[i]), .tx_data(tx_data[i]),
      .rx_valid(rx_valid[i]), .rx_data(rx_data[i]), .rx_pop(rx_pop[i]),
      .res_valid(res_valid[i]), .res(res[i]), .busy(busy[i]));
  end

  // links: r from party i goes to party i+1; alpha queues per party
  vec_t link_q[3][$];
  vec_t alpha_q[3][$];
  bit   hold_rx[3];
  bit   hold_alpha;
  for (genvar i = 0; i < 3; i++) begin : g_l
    assign tx_ready[i] = 1'b1;
    assign rx_valid[i] = (link_q[i].size() != 0) && !hold_rx[i];
    assign rx_data[i]  = (link_q[i].size() != 0) ? link_q[i][0] : '0;
    assign av[i]       = (alpha_q[i].size() != 0) && !hold_alpha;
    assign alpha[i]    = (alpha_q[i].size() != 0) ? alpha_q[i][0] : '0;
  end
  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < 3; i++) begin
      if (rx_pop[i]) void'(link_q[i].pop_front());
      if (apop[i])   void'(alpha_q[i].pop_front());
    end
    for (int i = 0; i < 3; i++)
      if (tx_valid[i] && tx_ready[i]) link_q[(i + 1) % 3].push_back(tx_data[i]);
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  int accept_cyc[$];
  always @(posedge clk) if (rst_n && req_valid[0] && req_ready[0]) accept_cyc.push_back(cyc);

  share_t got[3];
  int ndone[3];
  always @(posedge clk) if (rst_n) for (int i = 0; i < 3; i++) if (res_valid[i]) begin
    got[i] = res[i]; ndone[i]++;
  end

  task automatic push_alpha();
    vec_t a0, a1;
    a0 = rand_vec(); a1 = rand_vec();
    alpha_q[0].push_back(a0); alpha_q[1].push_back(a1); alpha_q[2].push_back(a0 ^ a1);
  endtask

  // one AND on all three parties; late_party delays its request
  task automatic run_gate(input int late_party, input int late_by);
    vec_t v, w;
    share_t s0[3], s1[3];
    int n0;
    v = rand_vec(); w = rand_vec();
    share(v, s0); share(w, s1);
    push_alpha();
    n0 = ndone[0];
    @(negedge clk);
    for (int i = 0; i < 3; i++) begin
      in0[i] = s0[i]; in1[i] = s1[i];
      req_valid[i] = (i != late_party);
    end
    @(posedge clk); #1;
    for (int i = 0; i < 3; i++) if (i != late_party) req_valid[i] = 0;
    if (late_party >= 0) begin
      repeat (late_by) @(posedge clk);
      @(negedge clk); req_valid[late_party] = 1;
      @(posedge clk); #1; req_valid[late_party] = 0;
    end
    while (!(ndone[0] > n0 && ndone[1] > n0 && ndone[2] > n0 && !busy[0] && !busy[1] && !busy[2]))
      @(posedge clk);
    #1;
    check(reconstruct(got) == (v & w), "AND value");
    check(well_formed(got, v & w), "AND output sharing");
  endtask

  initial begin
    bit gaps_ok;
    foreach (req_valid[i]) begin req_valid[i] = 0; hold_rx[i] = 0; in0[i] = '0; in1[i] = '0; ndone[i] = 0; end
    hold_alpha = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // back-to-back operations, everything ready: one accepted every 6 cycles
    for (int k = 0; k < 10; k++) push_alpha();
    @(negedge clk);
    for (int k = 0; k < 10; k++) begin
      vec_t v, w; share_t s0[3], s1[3];
      v = rand_vec(); w = rand_vec(); share(v, s0); share(w, s1);
      for (int i = 0; i < 3; i++) begin in0[i] = s0[i]; in1[i] = s1[i]; req_valid[i] = 1; end
      do @(posedge clk); while (!req_ready[0]);
      #1;
      for (int i = 0; i < 3; i++) req_valid[i] = 0;
      do begin @(posedge clk); #1; end while (!res_valid[0]);
      for (int i = 0; i < 3; i++) got[i] = res[i];
      check(reconstruct(got) == (v & w), $sformatf("pipelined AND %0d value", k));
      check(well_formed(got, v & w), $sformatf("pipelined AND %0d sharing", k));
      @(negedge clk);
    end
    gaps_ok = 1;
    for (int k = 1; k < accept_cyc.size(); k++)
      if (accept_cyc[k] - accept_cyc[k-1] != 6) begin
        gaps_ok = 0; $display("gap %0d", accept_cyc[k] - accept_cyc[k-1]);
      end
    check(accept_cyc.size() == 10 && gaps_ok, "6 cycles between operations");
    repeat (5) @(posedge clk);
    // alpha late: all units must wait in ALPHA
    hold_alpha = 1;
    fork
      run_gate(-1, 0);
      begin repeat (15) @(posedge clk); check(busy[0] && alpha_q[0].size() != 0, "waiting for alpha"); hold_alpha = 0; end
    join
    // one party late: the others wait for its r
    run_gate(1, 20);
    run_gate(2, 7);
    // neighbour's r held back in the receive path
    hold_rx[0] = 1;
    fork
      run_gate(-1, 0);
      begin repeat (20) @(posedge clk); check(busy[0], "waiting for r_{i-1}"); hold_rx[0] = 0; end
    join
    // random gates
    for (int k = 0; k < 20; k++) run_gate(int'($urandom_range(0, 3)) - 1, int'($urandom_range(0, 9)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
