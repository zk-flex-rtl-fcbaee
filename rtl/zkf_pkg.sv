// zkf_pkg: types and constants shared by the ZK-Flex datapath, network and controllers.
//
// Precision modes: the Toom-Cook core runs 256-bit (Toom-2), 384-bit (Toom-3) or
// 768-bit (hybrid Toom-2 over Toom-3) Montgomery multiplications, all built from
// 128-bit slices. The division-free Toom-k interpolation returns d*A*B, with d = 1
// for Toom-2 and d = 36 for Toom-3 and the hybrid; both values are the paper's.
// The network carries single-flit packets with a 768-bit payload (the paper's link
// width); the header layout, opcodes and node numbering are this design's own.
package zkf_pkg;

  // ---------------------------------------------------------------- arithmetic
  localparam int unsigned SLICE_W   = 128;   // Toom-Cook slice width m
  localparam int unsigned MW        = 134;   // signed multiplier operand width (128 + guard bits)
  localparam int unsigned PRODW     = 2*MW;  // signed M-PE product width
  localparam int unsigned MAXW      = 768;   // largest operand width
  localparam int unsigned PW        = 1544;  // d*A*B for 768-bit operands (1536 + 6 bits of d=36 + sign)
  localparam int unsigned N_GROUPS  = 45;    // PE groups per TCore
  localparam int unsigned N_SLOTS   = 3;     // integer-multiplier slots (one per Montgomery step)
  localparam int unsigned GROUPS_PER_SLOT = N_GROUPS / N_SLOTS; // 15
  localparam int unsigned MAX_LANES = 5;     // Montgomery multipliers per TCore in 256-bit mode
  localparam int unsigned N_MODADD_SLICES = 24;
  localparam int unsigned TOOM3_D   = 36;

  typedef enum logic [1:0] {
    MODE_256 = 2'd0,   // Toom-2, 5 Montgomery multipliers per TCore
    MODE_384 = 2'd1,   // Toom-3, 3 Montgomery multipliers per TCore
    MODE_768 = 2'd2    // hybrid Toom-2/Toom-3, 1 Montgomery multiplier per TCore
  } prec_mode_e;

  // operand width n (= log2 R) of a mode
  function automatic int unsigned mode_bits(prec_mode_e m);
    case (m)
      MODE_256: return 256;
      MODE_384: return 384;
      default:  return 768;
    endcase
  endfunction

  // Montgomery multipliers (lanes) per TCore in a mode (Fig. 5c: 5 / 3 / 1)
  function automatic int unsigned mode_lanes(prec_mode_e m);
    case (m)
      MODE_256: return 5;
      MODE_384: return 3;
      default:  return 1;
    endcase
  endfunction

  // Toom-Cook evaluation points used by the E-PEs
  typedef enum logic [2:0] {
    EV_0    = 3'd0,  // A(0)   = a0
    EV_1    = 3'd1,  // A(1)   = a0 + a1 + a2
    EV_M1   = 3'd2,  // A(-1)  = a0 - a1 + a2
    EV_2    = 3'd3,  // A(2)   = a0 + 2 a1 + 4 a2
    EV_INF  = 3'd4   // A(inf) = top slice
  } eval_pt_e;

  // ---------------------------------------------------------------- network
  localparam int unsigned GRID      = 8;     // 8x8 ruche network
  localparam int unsigned NODE_W    = 7;     // node id = {ext, y[2:0], x[2:0]}; ext=1: off-chip port below column x
  localparam int unsigned RUCHE     = 2;     // ruche factor (long links skip this many hops)
  localparam int unsigned FLIT_W    = 768;   // link payload width
  localparam int unsigned TAG_W     = 16;

  typedef enum logic [3:0] {
    OP_NOP      = 4'd0,
    OP_WR       = 4'd1,  // memory node: write payload at tag (6 x 128-bit words)
    OP_RD       = 4'd2,  // memory node: read tag, send payload to rdst with rop/rtag
    OP_CFG_MODE = 4'd3,  // TCore: payload[1:0] = precision mode
    OP_CFG_Q    = 4'd4,  // TCore: payload = modulus Q
    OP_CFG_QINV = 4'd5,  // TCore: payload = Q' = -Q^-1 mod R
    OP_MUL      = 4'd6,  // TCore: Montgomery multiply of the packed operand pair
    OP_MULA     = 4'd7,  // TCore 768-bit mode: first operand
    OP_ADD      = 4'd8,  // TCore: modular add of the packed operand pair
    OP_SUB      = 4'd9,  // TCore: modular subtract of the packed operand pair
    OP_SMRD     = 4'd10, // TCore: read a result held in shared memory slot tag
    OP_RESP     = 4'd11  // result / data returned to a requester
  } op_e;

  typedef struct packed {
    logic [NODE_W-1:0] dst;   // destination node
    logic [NODE_W-1:0] rdst;  // node that receives the result
    op_e               op;
    op_e               rop;   // opcode of the result packet (memory reads)
    logic [TAG_W-1:0]  tag;   // address / slot
    logic [TAG_W-1:0]  rtag;  // tag of the result packet
    logic [FLIT_W-1:0] data;
  } flit_t;

  localparam int unsigned N_PORTS = 9;
  typedef enum logic [3:0] {
    P_LOCAL = 4'd0, P_N = 4'd1, P_S = 4'd2, P_E = 4'd3, P_W = 4'd4,
    P_RN = 4'd5, P_RS = 4'd6, P_RE = 4'd7, P_RW = 4'd8
  } port_e;

  function automatic logic [NODE_W-1:0] node_id(int unsigned x, int unsigned y);
    return NODE_W'(y * GRID + x);
  endfunction

  // ---------------------------------------------------------------- global controller
  localparam int unsigned SCALAR_W  = 768;   // MSM scalar width (MNT4-753 scalars have 753 bits)
  localparam int unsigned NTT_AW    = 31;    // NTT sizes up to 2^31 points
  localparam int unsigned NTT_ST    = 31;    // NTT stages at most

  typedef enum logic [2:0] {
    G_NOP     = 3'd0,
    G_NTT     = 3'd1,  // data[31:0] = N, data[36:32] = stages, data[160:37] = radices (4 bits each)
    G_MSM_CFG = 3'd2,  // arg[3:0] = window bits c, arg[16:4] = points, arg[20:17] = MPADD engines
    G_SCALAR  = 3'd3,  // arg[11:0] = point address, data = scalar
    G_MSM_WIN = 3'd4,  // arg[7:0] = window index: rebuild the bucket lists for it
    G_MSM_RUN = 3'd5   // dispense the current window's buckets to the MPADD engines
  } gop_e;

  typedef struct packed {
    gop_e          op;
    logic [31:0]   arg;
    logic [SCALAR_W-1:0] data;
  } host_cmd_t;

endpackage
