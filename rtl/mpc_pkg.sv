// mpc_pkg: types and constants shared by the three-party secret-sharing
// MPC datapath.
//
// A secret bit v is held by party P_i as the pair (x_i, a_i) with
// x_1 ^ x_2 ^ x_3 = 0 and a_i = x_{i-1} ^ v (one-time pad of v).  The hardware
// works on SHARE_W such bits side by side (128, the width of one AES block and
// of one "AND core" in the paper), so every share is a 128-bit vector.
//
// The AXI message layout follows the paper in carrying two share vectors
// (4 x 128 bits) in one 512-bit data beat; the order of the four fields in the
// beat and the address map are this design's own choice.
package mpc_pkg;

  localparam int unsigned SHARE_W   = 128;  // bits per share vector (paper: 128)
  localparam int unsigned N_PARTIES = 3;    // Araki et al. protocol: exactly 3
  localparam int unsigned AXI_DW    = 512;  // paper: 512-bit AXI data
  localparam int unsigned AXI_AW    = 32;

  typedef logic [SHARE_W-1:0] vec_t;
  typedef logic [127:0]       key_t;

  // One party's share of a vector of secret bits.
  typedef struct packed {
    vec_t x;
    vec_t a;
  } share_t;

  typedef enum logic {
    OP_AND = 1'b0,
    OP_XOR = 1'b1
  } mpc_op_e;

  // Operand message for one gate at one party.
  typedef struct packed {
    mpc_op_e op;
    share_t  in0;   // (X_i, A_i)
    share_t  in1;   // (Y_i, B_i)
  } gate_req_t;

  // Address map of the AXI parser (byte addresses, one 64-byte slot per unit):
  //   addr[5:0]             byte offset in the 512-bit beat, ignored
  //   addr[6 +: UNIT_BITS]  unit (party block) index
  //   addr[OP_BIT]          on writes: 0 = AND, 1 = XOR
  localparam int unsigned SLOT_LSB = 6;
  localparam int unsigned OP_BIT   = 20;

  // 512-bit write beat: [127:0] X, [255:128] A, [383:256] Y, [511:384] B.
  // 512-bit read beat : [127:0] Z, [255:128] C, [256] result valid,
  //                     [257] unit busy, [258] keys ready, [319:288] op count.
  localparam int unsigned RD_VALID_BIT = 256;
  localparam int unsigned RD_BUSY_BIT  = 257;
  localparam int unsigned RD_READY_BIT = 258;
  localparam int unsigned RD_CNT_LSB   = 288;

  localparam logic [1:0] RESP_OKAY   = 2'b00;
  localparam logic [1:0] RESP_SLVERR = 2'b10;
  localparam logic [1:0] RESP_DECERR = 2'b11;

endpackage
