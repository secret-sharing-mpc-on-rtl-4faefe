// tb_aes128_pipe: checks the pipelined AES-128 PRF against the FIPS-197
// known-answer vectors (Appendix B and Appendix C.1), checks the 21-cycle
// latency, and checks that back-to-back inputs with alternating keys come out
// in order one per cycle with their tags.
module tb_aes128_pipe;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic in_valid, out_valid;
  logic [127:0] in_key, in_block, out_block;
  logic [0:0] in_tag, out_tag;
  int checks = 0, failures = 0;

  aes128_pipe #(.TAG_W(1)) dut (.*);

  localparam logic [127:0] K1 = 128'h000102030405060708090a0b0c0d0e0f;
  localparam logic [127:0] P1 = 128'h00112233445566778899aabbccddeeff;
  localparam logic [127:0] C1 = 128'h69c4e0d86a7b0430d8cdb78070b4c55a;
  localparam logic [127:0] K2 = 128'h2b7e151628aed2a6abf7158809cf4f3c;
  localparam logic [127:0] P2 = 128'h3243f6a8885a308d313198a2e0370734;
  localparam logic [127:0] C2 = 128'h3925841d02dc09fbdc118597196a0b32;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Expected output stream, recorded as inputs are issued.
  logic [127:0] exp_q[$];
  logic         exp_tag_q[$];
  int           exp_cyc_q[$];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (rst_n && out_valid) begin
    if (exp_q.size() == 0) check(0, "unexpected output");
    else begin
      logic [127:0] e; logic t; int c;
      e = exp_q.pop_front(); t = exp_tag_q.pop_front(); c = exp_cyc_q.pop_front();
      check(out_block == e, $sformatf("block %h expected %h", out_block, e));
      check(out_tag == t, "tag");
      check(cyc - c == 21, $sformatf("latency %0d, expected 21", cyc - c));
    end
  end

  task automatic issue(input logic [127:0] k, input logic [127:0] p,
                       input logic [127:0] e, input logic t);
    in_valid <= 1'b1; in_key <= k; in_block <= p; in_tag <= t;
    @(posedge clk);
    exp_q.push_back(e); exp_tag_q.push_back(t); exp_cyc_q.push_back(cyc);
  endtask

  initial begin
    in_valid = 0; in_key = '0; in_block = '0; in_tag = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    issue(K1, P1, C1, 1'b0);
    in_valid <= 1'b0;
    repeat (30) @(posedge clk);
    // back to back, alternating keys as the correlated-randomness unit does
    for (int i = 0; i < 8; i++) begin
      if (i % 2 == 0) issue(K1, P1, C1, 1'b0);
      else            issue(K2, P2, C2, 1'b1);
    end
    in_valid <= 1'b0;
    repeat (30) @(posedge clk);
    check(exp_q.size() == 0, "all outputs seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
