// tb_mpc_rng: checks the key generator against the LFSR recurrence
// b[n] = b[n-128] ^ b[n-126] ^ b[n-101] ^ b[n-99], worked out here on a plain
// bit array, and checks that a fresh word is flagged every 128 cycles.
module tb_mpc_rng;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  localparam logic [127:0] SEED = 128'h8000_0000_0000_0000_0000_0000_0000_0001;

  logic rnd_valid;
  logic [127:0] rnd;
  int checks = 0, failures = 0;

  mpc_rng #(.SEED(SEED)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // bit stream: bits[0..127] are the seed, oldest (MSB) first
  bit bits[1024];
  function automatic logic [127:0] word_at(int n);   // register after n shifts
    logic [127:0] w;
    for (int k = 0; k < 128; k++) w[127-k] = bits[n + k];
    return w;
  endfunction

  initial begin
    int cyc, pulses;
    for (int k = 0; k < 128; k++) bits[k] = SEED[127-k];
    for (int n = 128; n < 1024; n++)
      bits[n] = bits[n-128] ^ bits[n-126] ^ bits[n-101] ^ bits[n-99];
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    cyc = 0; pulses = 0;
    while (cyc < 600) begin
      @(posedge clk); #1;
      cyc++;
      checks++;
      if (rnd !== word_at(cyc)) begin
        failures++; $display("FAIL: word after %0d shifts", cyc);
      end
      if (rnd_valid) begin
        pulses++;
        checks++;
        if (cyc % 128 != 0) begin failures++; $display("FAIL: pulse at %0d", cyc); end
      end
    end
    checks++;
    if (pulses != 600 / 128) begin failures++; $display("FAIL: %0d pulses", pulses); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
