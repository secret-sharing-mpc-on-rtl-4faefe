// mpc_axi_parser: host-facing AXI slave of the MPC accelerator.
//
// The host writes one 512-bit data beat per gate: the two input shares of
// one party, (x_i, a_i) and (y_i, b_i), 4 x 128 bits, as in the paper.  The
// parser decodes the address, relays the operands to the addressed unit
// (one party block) and starts it, all in the cycle after the beat is
// accepted.  A unit that is still busy refuses the operands and the write
// is answered SLVERR, so the host must retry (or poll the busy flag first).
// Holding such a write instead would block the single write channel, and
// with it the writes to the other two parties that the busy unit is waiting
// for.  Reading a unit's slot returns its latest result (z_i, c_i)
// and status flags; the host polls the "result valid" flag.
//
// The paper states the 512-bit message size and that messages are parsed
// and relayed to the desired AND module.  The address map, the field order
// in the beat, the status word, single-beat transfers (no bursts, no IDs,
// WSTRB ignored: every write is a full beat) and the error responses are
// this design's choices; see mpc_pkg for the layout.  Timing: a write
// beat is accepted when AWVALID and WVALID are both high; the unit sees its
// request one cycle later and BVALID follows one cycle after that.  A write and a read
// may be in progress at the same time.  Unused slots answer DECERR.
module mpc_axi_parser #(
  parameter int unsigned N_UNITS = 3
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // AXI write address / data / response
  input  logic                        s_awvalid,
  output logic                        s_awready,
  input  logic [mpc_pkg::AXI_AW-1:0]  s_awaddr,
  input  logic                        s_wvalid,
  output logic                        s_wready,
  input  logic [mpc_pkg::AXI_DW-1:0]  s_wdata,
  output logic                        s_bvalid,
  input  logic                        s_bready,
  output logic [1:0]                  s_bresp,
  // AXI read address / data
  input  logic                        s_arvalid,
  output logic                        s_arready,
  input  logic [mpc_pkg::AXI_AW-1:0]  s_araddr,
  output logic                        s_rvalid,
  input  logic                        s_rready,
  output logic [mpc_pkg::AXI_DW-1:0]  s_rdata,
  output logic [1:0]                  s_rresp,
  // units
  output logic [N_UNITS-1:0]          u_req_valid,
  input  logic [N_UNITS-1:0]          u_req_ready,
  output mpc_pkg::gate_req_t          u_req,
  input  logic [N_UNITS-1:0]          u_res_valid,
  input  mpc_pkg::share_t             u_res [N_UNITS],
  input  logic [N_UNITS-1:0]          u_keys_ready,
  output logic [31:0]                 err_count
);
  import mpc_pkg::*;

  localparam int unsigned IDX_W = OP_BIT - SLOT_LSB;   // 14-bit slot field
  localparam int unsigned UB    = (N_UNITS > 1) ? $clog2(N_UNITS) : 1;

  typedef enum logic [1:0] { W_IDLE, W_ISSUE, W_RESP } wstate_e;
  typedef enum logic       { R_IDLE, R_DATA }          rstate_e;

  wstate_e    wst_q;
  rstate_e    rst_q;
  logic [UB-1:0] widx_q, ridx_q;
  logic       w_err, r_err;
  logic       wbad_q, rbad_q;
  logic [1:0] bresp_q;
  gate_req_t  req_q;

  share_t     res_q   [N_UNITS];
  logic [N_UNITS-1:0] resv_q, busy_q;
  logic [31:0] cnt_q  [N_UNITS];

  function automatic logic [IDX_W-1:0] slot(input logic [AXI_AW-1:0] a);
    return a[SLOT_LSB +: IDX_W];
  endfunction

  function automatic logic in_range(input logic [AXI_AW-1:0] a);
    return 32'(slot(a)) < N_UNITS;
  endfunction

  // ---------------- write path
  assign s_awready = (wst_q == W_IDLE) && s_awvalid && s_wvalid;
  assign s_wready  = s_awready;
  assign s_bvalid  = (wst_q == W_RESP);
  assign s_bresp   = bresp_q;
  assign u_req     = req_q;

  always_comb begin
    u_req_valid = '0;
    if (wst_q == W_ISSUE && !wbad_q) u_req_valid[widx_q] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wst_q     <= W_IDLE;
      wbad_q    <= 1'b0;
      widx_q    <= '0;
      bresp_q   <= RESP_OKAY;
      err_count <= '0;
    end else begin
      unique case (wst_q)
        W_IDLE: if (s_awready) begin
          widx_q <= UB'(slot(s_awaddr));
          wbad_q <= !in_range(s_awaddr);
          wst_q  <= W_ISSUE;
        end
        W_ISSUE: begin
          wst_q   <= W_RESP;
          bresp_q <= wbad_q                ? RESP_DECERR :
                     u_req_ready[widx_q]  ? RESP_OKAY   : RESP_SLVERR;
        end
        W_RESP: if (s_bready) wst_q <= W_IDLE;
        default: wst_q <= W_IDLE;
      endcase
      err_count <= err_count + 32'(w_err) + 32'(r_err);
    end
  end

  // errors: one per write refused (empty slot or busy unit), one per read
  // of an empty slot
  assign w_err = (wst_q == W_ISSUE) && (wbad_q || !u_req_ready[widx_q]);
  assign r_err = (rst_q == R_IDLE) && s_arvalid && !in_range(s_araddr);

  always_ff @(posedge clk) begin
    if (s_awready) begin
      req_q.op      <= s_awaddr[OP_BIT] ? OP_XOR : OP_AND;
      req_q.in0.x   <= s_wdata[127:0];
      req_q.in0.a   <= s_wdata[255:128];
      req_q.in1.x   <= s_wdata[383:256];
      req_q.in1.a   <= s_wdata[511:384];
    end
  end

  // ---------------- per-unit result registers
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      resv_q <= '0;
      busy_q <= '0;
      for (int u = 0; u < N_UNITS; u++) cnt_q[u] <= '0;
    end else begin
      for (int u = 0; u < N_UNITS; u++) begin
        if (u_req_valid[u] && u_req_ready[u]) begin
          busy_q[u] <= 1'b1;
          resv_q[u] <= 1'b0;
        end
        if (u_res_valid[u]) begin
          busy_q[u] <= 1'b0;
          resv_q[u] <= 1'b1;
          cnt_q[u]  <= cnt_q[u] + 32'd1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    for (int u = 0; u < N_UNITS; u++)
      if (u_res_valid[u]) res_q[u] <= u_res[u];
  end

  // ---------------- read path
  assign s_arready = (rst_q == R_IDLE);
  assign s_rvalid  = (rst_q == R_DATA);
  assign s_rresp   = rbad_q ? RESP_DECERR : RESP_OKAY;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rst_q  <= R_IDLE;
      ridx_q <= '0;
      rbad_q <= 1'b0;
    end else begin
      unique case (rst_q)
        R_IDLE: if (s_arvalid) begin
          ridx_q <= UB'(slot(s_araddr));
          rbad_q <= !in_range(s_araddr);
          rst_q  <= R_DATA;
        end
        R_DATA: if (s_rready) rst_q <= R_IDLE;
        default: rst_q <= R_IDLE;
      endcase
    end
  end

  always_comb begin
    s_rdata = '0;
    if (!rbad_q) begin
      s_rdata[127:0]                 = res_q[ridx_q].x;
      s_rdata[255:128]               = res_q[ridx_q].a;
      s_rdata[RD_VALID_BIT]          = resv_q[ridx_q];
      s_rdata[RD_BUSY_BIT]           = busy_q[ridx_q];
      s_rdata[RD_READY_BIT]          = u_keys_ready[ridx_q];
      s_rdata[RD_CNT_LSB +: 32]      = cnt_q[ridx_q];
    end
  end

  // AXI rules seen from the slave side
  assert property (@(posedge clk) disable iff (!rst_n) s_bvalid && !s_bready |=> s_bvalid && $stable(s_bresp))
    else $error("mpc_axi_parser: B response withdrawn");
  assert property (@(posedge clk) disable iff (!rst_n) s_rvalid && !s_rready |=> s_rvalid && $stable(s_rdata))
    else $error("mpc_axi_parser: R data withdrawn or changed");
  assert property (@(posedge clk) disable iff (!rst_n) s_awvalid && !s_awready |=> s_awvalid)
    else $error("mpc_axi_parser: master withdrew AWVALID");

endmodule
