// tb_mpc_corr_rand: three correlated-randomness generators wired as three
// parties (P_i holds K_i and K_{i+1}).  Checks, per counter value k:
//   alpha_i(k) = AES_{K_i}(k) ^ AES_{K_{i+1}}(k), with the AES values taken
//   from a separate reference AES instance, and
//   alpha_0 ^ alpha_1 ^ alpha_2 = 0.
// Also checks the start-up latency (21-cycle PRF plus one issue cycle), that
// the generator stalls without losing values while nobody consumes alphas,
// and the steady rate of one alpha per two cycles.
module tb_mpc_corr_rand;
  import mpc_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  localparam int unsigned DEPTH = 16;
  localparam int NCHK = 40;

  key_t K[3];
  logic keys_valid;
  logic av[3], apop[3], stall[3];
  vec_t alpha[3];
  logic [31:0] acnt[3];
  int checks = 0, failures = 0;

  for (genvar i = 0; i < 3; i++) begin : g_p
    mpc_corr_rand #(.DEPTH(DEPTH)) dut (
      .clk, .rst_n, .keys_valid,
      .key_own(K[i]), .key_next(K[(i+1)%3]),
      .alpha_valid(av[i]), .alpha(alpha[i]), .alpha_pop(apop[i]),
      .stall(stall[i]), .alpha_count(acnt[i]));
  end

  // reference AES
  logic rv, rov; logic [127:0] rk, rb, rob; logic [0:0] rt, rot;
  aes128_pipe #(.TAG_W(1)) u_ref (.clk, .rst_n, .in_valid(rv), .in_key(rk),
    .in_block(rb), .in_tag(rt), .out_valid(rov), .out_block(rob), .out_tag(rot));
  logic [127:0] ref_f[3][NCHK];   // ref_f[key][ctr]
  int ref_n = 0;
  always @(posedge clk) if (rst_n && rov) begin
    ref_f[ref_n % 3][ref_n / 3] = rob;
    ref_n++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #400000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    int t0, first_seen, got, stalls, c0;
    vec_t e;
    K[0] = 128'h000102030405060708090a0b0c0d0e0f;
    K[1] = 128'h2b7e151628aed2a6abf7158809cf4f3c;
    K[2] = 128'hdeadbeef0badf00d0123456789abcdef;
    keys_valid = 0; rv = 0; rk = '0; rb = '0; rt = '0;
    foreach (apop[i]) apop[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // reference values
    for (int k = 0; k < NCHK; k++)
      for (int j = 0; j < 3; j++) begin
        rv <= 1; rk <= K[j]; rb <= 128'(k); @(posedge clk);
      end
    rv <= 0;
    repeat (30) @(posedge clk);
    check(ref_n == 3 * NCHK, "reference values");

    // start generation, nobody consumes: must fill DEPTH and stall
    keys_valid <= 1;
    @(posedge clk); t0 = cyc;
    first_seen = -1; stalls = 0;
    repeat (80) begin
      @(posedge clk); #1;
      if (av[0] && first_seen < 0) first_seen = cyc - t0;
      if (stall[0]) stalls++;
    end
    check(first_seen == 23, $sformatf("first alpha after %0d cycles, expected 23", first_seen));
    check(stalls > 0, "generator stalled while the buffer was full");
    check(acnt[0] == DEPTH, $sformatf("alpha count %0d with full buffer", acnt[0]));

    // consume continuously and compare
    got = 0;
    c0 = cyc;
    while (got < NCHK) begin
      @(negedge clk);
      for (int i = 0; i < 3; i++) apop[i] = av[0] && av[1] && av[2];
      if (apop[0]) begin
        for (int i = 0; i < 3; i++) begin
          e = ref_f[i][got] ^ ref_f[(i+1)%3][got];
          check(alpha[i] == e, $sformatf("party %0d alpha %0d", i, got));
        end
        check((alpha[0] ^ alpha[1] ^ alpha[2]) == '0, "alphas XOR to zero");
        check(alpha[0] != '0, "alpha not zero");
        got++;
      end
      @(posedge clk); #1;
      for (int i = 0; i < 3; i++) apop[i] = 0;
    end
    // DEPTH ready at once; the refill started by the first pop arrives after
    // the 23-cycle start-up latency and then at one alpha per two cycles
    check(cyc - c0 <= 23 + 2 * (NCHK - DEPTH) + 1,
          $sformatf("%0d alphas took %0d cycles", NCHK, cyc - c0));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
