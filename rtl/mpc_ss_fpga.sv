// mpc_ss_fpga: single-FPGA three-party secret-sharing MPC system.
//
// N_GROUPS independent groups of three party blocks sit behind one AXI
// parser.  Within a group the parties are wired exactly as three separate
// machines would be: each party hands its PRF key to the previous party and
// sends its r values to the next one (P0 -> P1 -> P2 -> P0), so the three
// together evaluate AND and XOR gates on 128-bit vectors of secret-shared
// bits.  This is the arrangement the paper uses to test all three parties on
// one device, and the one it duplicates to fill the device: one group holds
// three 128-bit AND units ("AND cores"), so N_GROUPS groups hold 3*N_GROUPS.
//
// Host view: unit u = 3*g + p is party p of group g and owns the 64-byte AXI
// slot u.  A gate is evaluated by writing the operand beat of each of the
// three parties to its slot (AND at slot address, XOR with address bit 20
// set) and reading the three slots back until their result-valid flags are
// set.  The host can split and rebuild secrets itself: it plays the data
// holder and the output party, which the paper places outside the compute
// parties.  Each AND keeps a unit busy for 6 cycles when its neighbours keep
// pace, as in the paper's implementation.
//
// The default N_GROUPS = 1 is the paper's 3-AND-core configuration (the one
// it compares with the 20-core CPU implementation); the paper's Table II
// goes up to 20 groups (60 cores).  Party seeds are derived from SEED_BASE
// and the unit number; they stand in for the paper's random start-up keys.
module mpc_ss_fpga #(
  parameter int unsigned  N_GROUPS    = 1,
  parameter int unsigned  ALPHA_DEPTH = 16,
  parameter int unsigned  RX_DEPTH    = 4,
  parameter logic [127:0] SEED_BASE   = 128'h5eed_0000_0000_0000_0000_0000_0000_0001
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        s_awvalid,
  output logic                        s_awready,
  input  logic [mpc_pkg::AXI_AW-1:0]  s_awaddr,
  input  logic                        s_wvalid,
  output logic                        s_wready,
  input  logic [mpc_pkg::AXI_DW-1:0]  s_wdata,
  output logic                        s_bvalid,
  input  logic                        s_bready,
  output logic [1:0]                  s_bresp,
  input  logic                        s_arvalid,
  output logic                        s_arready,
  input  logic [mpc_pkg::AXI_AW-1:0]  s_araddr,
  output logic                        s_rvalid,
  input  logic                        s_rready,
  output logic [mpc_pkg::AXI_DW-1:0]  s_rdata,
  output logic [1:0]                  s_rresp,
  output logic [3*N_GROUPS-1:0]       keys_ready,
  output logic [3*N_GROUPS-1:0]       unit_busy,
  output logic [3*N_GROUPS-1:0]       alpha_stall,
  output logic [31:0]                 err_count
);
  import mpc_pkg::*;

  localparam int unsigned N_UNITS = 3 * N_GROUPS;

  logic [N_UNITS-1:0] req_valid, req_ready, res_valid;
  gate_req_t          req;
  share_t             res [N_UNITS];

  logic [N_UNITS-1:0] key_valid, tx_valid, tx_ready, rx_ready;
  key_t               key     [N_UNITS];
  vec_t               tx_data [N_UNITS];

  mpc_axi_parser #(.N_UNITS(N_UNITS)) u_parser (
    .clk, .rst_n,
    .s_awvalid, .s_awready, .s_awaddr, .s_wvalid, .s_wready, .s_wdata,
    .s_bvalid, .s_bready, .s_bresp,
    .s_arvalid, .s_arready, .s_araddr, .s_rvalid, .s_rready, .s_rdata, .s_rresp,
    .u_req_valid (req_valid),
    .u_req_ready (req_ready),
    .u_req       (req),
    .u_res_valid (res_valid),
    .u_res       (res),
    .u_keys_ready(keys_ready),
    .err_count   (err_count)
  );

  for (genvar g = 0; g < N_GROUPS; g++) begin : g_grp
    for (genvar p = 0; p < 3; p++) begin : g_party
      localparam int unsigned U    = 3 * g + p;
      localparam int unsigned NEXT = 3 * g + (p + 1) % 3;   // P_{i+1}
      localparam int unsigned PREV = 3 * g + (p + 2) % 3;   // P_{i-1}
      localparam logic [127:0] SEED =
        SEED_BASE ^ (128'(U + 1) * 128'h9e37_79b9_7f4a_7c15_f39c_c060_5ced_c835);

      logic [31:0] and_count, xor_count, alpha_count;   // observed by testbenches

      mpc_party #(
        .SEED       (SEED),
        .ALPHA_DEPTH(ALPHA_DEPTH),
        .RX_DEPTH   (RX_DEPTH)
      ) u_party (
        .clk, .rst_n,
        .key_out_valid(key_valid[U]),
        .key_out      (key[U]),
        .key_in_valid (key_valid[NEXT]),
        .key_in       (key[NEXT]),
        .keys_ready   (keys_ready[U]),
        .req_valid    (req_valid[U]),
        .req_ready    (req_ready[U]),
        .req          (req),
        .res_valid    (res_valid[U]),
        .res          (res[U]),
        .tx_valid     (tx_valid[U]),
        .tx_ready     (tx_ready[U]),
        .tx_data      (tx_data[U]),
        .rx_valid     (tx_valid[PREV]),
        .rx_ready     (rx_ready[U]),
        .rx_data      (tx_data[PREV]),
        .and_count    (and_count),
        .xor_count    (xor_count),
        .alpha_count  (alpha_count),
        .alpha_stall  (alpha_stall[U]),
        .busy         (unit_busy[U])
      );
      assign tx_ready[U] = rx_ready[NEXT];
    end
  end

endmodule
