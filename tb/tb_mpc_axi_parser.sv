// tb_mpc_axi_parser: the AXI parser against three model units.  A model
// unit is not ready for a random number of cycles (writes in that time must
// be refused with SLVERR and must not reach it) and answers a few cycles
// after accepting with a result derived from the operands.  Checks: the four
// 128-bit fields and the opcode arrive at the addressed unit only, refused
// writes leave the unit untouched, reads return the unit's result, flags and
// counter, and writes or reads to slots without a unit are answered DECERR.
module tb_mpc_axi_parser;
  import mpc_pkg::*;
  import tb_mpc_pkg::*;
  localparam int unsigned N = 3;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic s_awvalid, s_awready, s_wvalid, s_wready, s_bvalid, s_bready;
  logic s_arvalid, s_arready, s_rvalid, s_rready;
  logic [31:0] s_awaddr, s_araddr, err_count;
  logic [511:0] s_wdata, s_rdata;
  logic [1:0] s_bresp, s_rresp;
  logic [N-1:0] u_req_valid, u_req_ready, u_res_valid, u_keys_ready;
  gate_req_t u_req;
  share_t u_res [N];
  int checks = 0, failures = 0;

  mpc_axi_parser #(.N_UNITS(N)) dut (.*);

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

  // ---------------- model units
  gate_req_t last_req [N];
  int        nreq [N];
  int        delay [N];
  int        pend [N];    // cycles until the result, -1 none
  int        accept_cyc [N];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  assign u_keys_ready = 3'b101;
  for (genvar u = 0; u < N; u++) begin : g_u
    assign u_req_ready[u] = (delay[u] == 0) && (pend[u] < 0);
    always @(posedge clk) if (rst_n) begin
      u_res_valid[u] <= 1'b0;
      if (delay[u] > 0) delay[u]--;
      if (u_req_valid[u] && u_req_ready[u]) begin
        last_req[u] = u_req; nreq[u]++; pend[u] = 3; accept_cyc[u] = cyc;
      end else if (pend[u] > 0) pend[u]--;
      else if (pend[u] == 0) begin
        u_res_valid[u] <= 1'b1;
        u_res[u].x <= last_req[u].in0.x ^ last_req[u].in1.a ^ vec_t'(u);
        u_res[u].a <= last_req[u].in0.a & last_req[u].in1.x;
        pend[u] = -1;
      end
    end
  end

  // ---------------- AXI master tasks
  task automatic axi_write(input logic [31:0] addr, input logic [511:0] data,
                           output logic [1:0] resp, output int b_cyc);
    @(negedge clk);
    s_awvalid = 1; s_awaddr = addr; s_wvalid = 1; s_wdata = data;
    do @(posedge clk); while (!s_awready);
    #1 s_awvalid = 0; s_wvalid = 0;
    s_bready = 1;
    do @(posedge clk); while (!s_bvalid);
    resp = s_bresp; b_cyc = cyc;
    #1 s_bready = 0;
  endtask

  task automatic axi_read(input logic [31:0] addr, output logic [511:0] data,
                          output logic [1:0] resp);
    @(negedge clk);
    s_arvalid = 1; s_araddr = addr;
    do @(posedge clk); while (!s_arready);
    #1 s_arvalid = 0;
    s_rready = 1;
    do @(posedge clk); while (!s_rvalid);
    data = s_rdata; resp = s_rresp;
    #1 s_rready = 0;
  endtask

  initial begin
    logic [511:0] d, r;
    logic [1:0] resp;
    int bc, n0[N], n_slverr;
    n_slverr = 0;
    s_awvalid = 0; s_wvalid = 0; s_bready = 0; s_arvalid = 0; s_rready = 0;
    s_awaddr = '0; s_araddr = '0; s_wdata = '0;
    for (int u = 0; u < N; u++) begin nreq[u] = 0; delay[u] = 0; pend[u] = -1; u_res_valid[u] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 30; k++) begin
      int u; bit xop;
      u = $urandom_range(0, N - 1);
      xop = 1'($urandom_range(0, 1));
      d = {rand_vec(), rand_vec(), rand_vec(), rand_vec()};
      delay[u] = $urandom_range(0, 12);
      for (int j = 0; j < N; j++) n0[j] = nreq[j];
      forever begin
        axi_write((32'(u) << 6) | (32'(xop) << 20), d, resp, bc);
        if (resp != RESP_SLVERR) break;
        n_slverr++;
        check(nreq[u] == n0[u], "refused write did not reach the unit");
      end
      check(resp == RESP_OKAY, "write OKAY");
      for (int j = 0; j < N; j++)
        check(nreq[j] == n0[j] + ((j == u) ? 1 : 0), "request reached only the addressed unit");
      check(last_req[u].in0.x == d[127:0] && last_req[u].in0.a == d[255:128] &&
            last_req[u].in1.x == d[383:256] && last_req[u].in1.a == d[511:384], "fields");
      check(last_req[u].op == (xop ? OP_XOR : OP_AND), "opcode");
      check(bc > accept_cyc[u], "B after the unit took the request");
      check(bc - accept_cyc[u] <= 2, "B right after the request");
      // busy until the result
      axi_read(32'(u) << 6, r, resp);
      check(resp == RESP_OKAY, "read OKAY");
      if (!r[RD_VALID_BIT]) check(r[RD_BUSY_BIT], "busy while no result");
      repeat (6) @(posedge clk);
      axi_read(32'(u) << 6, r, resp);
      check(r[RD_VALID_BIT] && !r[RD_BUSY_BIT], "result valid");
      check(r[127:0] == (d[127:0] ^ d[511:384] ^ 128'(u)), "result z");
      check(r[255:128] == (d[255:128] & d[383:256]), "result c");
      check(r[RD_READY_BIT] == u_keys_ready[u], "keys-ready flag");
      check(r[RD_CNT_LSB +: 32] == 32'(nreq[u]), "operation count");
    end
    // out-of-range slots
    axi_write(32'(N) << 6, '1, resp, bc);
    check(resp == RESP_DECERR, "write to empty slot: DECERR");
    axi_read(32'(N + 5) << 6, r, resp);
    check(resp == RESP_DECERR && r == '0, "read of empty slot: DECERR");
    check(n_slverr > 0, "some writes found their unit busy");
    check(err_count == 32'(2 + n_slverr), "error count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
