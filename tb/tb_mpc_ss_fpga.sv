// tb_mpc_ss_fpga: end-to-end test of the single-FPGA three-party system at
// its default size, driven only through the AXI port as a host would.
//
// The testbench plays the data holder (splits random 128-bit secret vectors
// into three shares), writes each party's operands to its slot, polls the
// three result slots, and plays the output party (rebuilds the result from
// the three shares).  It evaluates single AND and XOR gates, then a small
// circuit whose gates feed each other, f = ((v & w) ^ u) & t, with the
// intermediate shares never rebuilt, and compares every result with the
// plain computation.
//
// It counts how often each mechanism of the design occurred and fails a
// mechanism that never did: AND and XOR gates, an AND that had to wait for
// an alpha (issued before the correlated-randomness unit had one ready), the
// alpha generator stalling on a full buffer, a party waiting for r_{i-1}
// because its predecessor was started late, a party running ahead with r
// values queued in its receive buffer, a write refused (SLVERR) because the
// unit was busy, and an access to an empty slot answered DECERR.  It also checks
// the 6-cycle operation time with all three parties started together.
module tb_mpc_ss_fpga;
  import mpc_pkg::*;
  import tb_mpc_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic s_awvalid, s_awready, s_wvalid, s_wready, s_bvalid, s_bready;
  logic s_arvalid, s_arready, s_rvalid, s_rready;
  logic [31:0] s_awaddr, s_araddr, err_count;
  logic [511:0] s_wdata, s_rdata;
  logic [1:0] s_bresp, s_rresp;
  logic [2:0] keys_ready, unit_busy, alpha_stall;
  int checks = 0, failures = 0;

  mpc_ss_fpga dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #3000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // ---------------- mechanism counters (observed inside the design)
  int n_alpha_wait = 0, n_alpha_stall = 0, n_rx_wait = 0, n_run_ahead = 0;
  int n_busy_write = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.g_grp[0].g_party[0].u_party.u_and.state_q == 3'd1 &&
        !dut.g_grp[0].g_party[0].u_party.alpha_valid) n_alpha_wait++;
    if (alpha_stall[0]) n_alpha_stall++;
    if (dut.g_grp[0].g_party[0].u_party.u_and.state_q == 3'd4 &&
        dut.g_grp[0].g_party[0].u_party.rxb_empty) n_rx_wait++;
    if (!dut.g_grp[0].g_party[2].u_party.rxb_empty &&
        !dut.g_grp[0].g_party[2].u_party.busy) n_run_ahead++;
    if (dut.u_parser.wst_q == 2'd1 && !dut.u_parser.wbad_q &&
        !dut.u_parser.u_req_ready[dut.u_parser.widx_q]) n_busy_write++;
  end

  // ---------------- host side
  task automatic axi_write(input logic [31:0] addr, input logic [511:0] data,
                           output logic [1:0] resp);
    @(negedge clk);
    s_awvalid = 1; s_awaddr = addr; s_wvalid = 1; s_wdata = data;
    do @(posedge clk); while (!s_awready);
    #1 s_awvalid = 0; s_wvalid = 0;
    s_bready = 1;
    do @(posedge clk); while (!s_bvalid);
    resp = s_bresp;
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

  function automatic logic [31:0] slot_addr(input int u, input mpc_op_e op);
    return (32'(u) << SLOT_LSB) | ((op == OP_XOR) ? (32'd1 << OP_BIT) : 32'd0);
  endfunction

  // start party p of a gate
  task automatic start(input int p, input mpc_op_e op, input share_t a, input share_t b);
    logic [1:0] resp;
    axi_write(slot_addr(p, op), {b.a, b.x, a.a, a.x}, resp);
    check(resp == RESP_OKAY, "write OKAY");
  endtask

  // wait for party p's result
  task automatic collect(input int p, output share_t r);
    logic [511:0] d;
    logic [1:0] resp;
    int tries;
    tries = 0;
    do begin
      axi_read(slot_addr(p, OP_AND), d, resp);
      tries++;
    end while (!d[RD_VALID_BIT] && tries < 1000);
    check(resp == RESP_OKAY && d[RD_VALID_BIT], "result readable");
    r.x = d[127:0];
    r.a = d[255:128];
  endtask

  // evaluate one gate on shared inputs; party `late` is started after `gap` cycles
  task automatic gate(input mpc_op_e op, input share_t a[3], input share_t b[3],
                      output share_t r[3], input int late = -1, input int gap = 0);
    for (int p = 0; p < 3; p++) if (p != late) start(p, op, a[p], b[p]);
    if (late >= 0) begin
      repeat (gap) @(posedge clk);
      start(late, op, a[late], b[late]);
    end
    for (int p = 0; p < 3; p++) collect(p, r[p]);
  endtask

  initial begin
    vec_t v, w, u, t, e;
    share_t sv[3], sw[3], su[3], st[3], r1[3], r2[3], r3[3];
    logic [511:0] d;
    logic [1:0] resp;
    int t0, n_and, n_xor;
    s_awvalid = 0; s_wvalid = 0; s_bready = 0; s_arvalid = 0; s_rready = 0;
    s_awaddr = '0; s_araddr = '0; s_wdata = '0;
    n_and = 0; n_xor = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // 1. AND issued straight after reset: waits for keys and the first alpha
    v = rand_vec(); w = rand_vec(); share(v, sv); share(w, sw);
    gate(OP_AND, sv, sw, r1); n_and++;
    check(reconstruct(r1) == (v & w), "first AND value");
    check(well_formed(r1, v & w), "first AND sharing");
    check(keys_ready == 3'b111, "all keys exchanged");

    // 2. XOR
    v = rand_vec(); w = rand_vec(); share(v, sv); share(w, sw);
    gate(OP_XOR, sv, sw, r1); n_xor++;
    check(reconstruct(r1) == (v ^ w), "XOR value");
    check(well_formed(r1, v ^ w), "XOR sharing");

    // 3. predecessor started late: P0 waits for r_2; P2 started late
    v = rand_vec(); w = rand_vec(); share(v, sv); share(w, sw);
    gate(OP_AND, sv, sw, r1, 2, 30); n_and++;
    check(reconstruct(r1) == (v & w), "skewed AND value");

    // 4. write to a busy unit: P0 is started, a second write to it is
    //    refused with SLVERR while it waits for its partners
    v = rand_vec(); w = rand_vec(); share(v, sv); share(w, sw);
    u = rand_vec(); t = rand_vec(); share(u, su); share(t, st);
    start(0, OP_AND, sv[0], sw[0]);
    axi_write(slot_addr(0, OP_AND), {st[0].a, st[0].x, su[0].a, su[0].x}, resp);
    check(resp == RESP_SLVERR, "write to busy unit refused");
    start(1, OP_AND, sv[1], sw[1]);
    start(2, OP_AND, sv[2], sw[2]);
    for (int p = 0; p < 3; p++) collect(p, r1[p]);
    n_and++;
    check(reconstruct(r1) == (v & w), "AND after refused write");

    // 5. circuit f = ((v & w) ^ u) & t, shares flow from gate to gate
    for (int k = 0; k < 6; k++) begin
      v = rand_vec(); w = rand_vec(); u = rand_vec(); t = rand_vec();
      share(v, sv); share(w, sw); share(u, su); share(t, st);
      gate(OP_AND, sv, sw, r1, int'($urandom_range(0, 3)) - 1, int'($urandom_range(0, 20)));
      gate(OP_XOR, r1, su, r2);
      gate(OP_AND, r2, st, r3, int'($urandom_range(0, 3)) - 1, int'($urandom_range(0, 20)));
      n_and += 2; n_xor++;
      e = ((v & w) ^ u) & t;
      check(reconstruct(r3) == e, $sformatf("circuit %0d value", k));
      check(well_formed(r3, e), $sformatf("circuit %0d sharing", k));
    end

    // 6. operation time: the AND unit of each party is busy for 6 cycles
    //    when the three parties have their operands at the same time
    begin
      int t_start, t_end;
      v = rand_vec(); w = rand_vec(); share(v, sv); share(w, sw);
      // P1 and P2 first, P0 last: P0 then finds r_2 waiting
      start(1, OP_AND, sv[1], sw[1]);
      start(2, OP_AND, sv[2], sw[2]);
      repeat (20) @(posedge clk);
      fork
        start(0, OP_AND, sv[0], sw[0]);
        begin
          wait (unit_busy[0]); t_start = cyc;
          wait (!unit_busy[0]); t_end = cyc;
        end
      join
      n_and++;
      for (int p = 0; p < 3; p++) collect(p, r1[p]);
      check(reconstruct(r1) == (v & w), "timed AND value");
      // busy covers the five states after the accepting IDLE cycle, so the
      // unit can take the next operation 6 cycles after this one
      check(t_end - t_start + 1 == 6, $sformatf("AND took %0d cycles, expected 6", t_end - t_start + 1));
    end

    // 7. empty slot
    axi_write(slot_addr(7, OP_AND), '0, resp);
    check(resp == RESP_DECERR, "empty slot write DECERR");
    axi_read(slot_addr(9, OP_AND), d, resp);
    check(resp == RESP_DECERR, "empty slot read DECERR");
    check(err_count == 3, "error count (one SLVERR, two DECERR)");

    // bookkeeping and mechanisms
    check(dut.g_grp[0].g_party[0].and_count == 32'(n_and) &&
          dut.g_grp[0].g_party[1].and_count == 32'(n_and) &&
          dut.g_grp[0].g_party[2].and_count == 32'(n_and), "AND count");
    check(dut.g_grp[0].g_party[0].xor_count == 32'(n_xor), "XOR count");
    $display("mechanisms: AND=%0d XOR=%0d alpha_wait=%0d alpha_stall=%0d rx_wait=%0d run_ahead=%0d busy_write=%0d decerr=%0d",
             n_and, n_xor, n_alpha_wait, n_alpha_stall, n_rx_wait, n_run_ahead, n_busy_write, err_count);
    check(n_alpha_wait > 0, "AND waited for alpha");
    check(n_alpha_stall > 0, "alpha generator stalled");
    check(n_rx_wait > 0, "party waited for r_{i-1}");
    check(n_run_ahead > 0, "receive buffer held r ahead of use");
    check(n_busy_write > 0, "write refused while unit busy");
    check(err_count > 0, "DECERR");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
