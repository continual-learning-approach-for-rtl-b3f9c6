// aimm_pkg: types and constants shared by the learned memory-mapping hardware.
//
// The system is a 4x4 mesh of 3D memory cubes with four memory controllers (MCs),
// one at each corner cube. A cube id is 4 bits: x = id[1:0], y = id[3:2].
// MC m sits on corner cube MC_CUBE[m] and collects status from the 2x2 quadrant of
// cubes nearest to it. Mesh size, MC count, 128-entry page information cache,
// 128-entry migration queue, 512-entry NMP-op table, the eight agent actions and the
// four invocation intervals (100/125/167/250 cycles) follow the paper. Page size
// (4 KiB), feature word format (Q8.8), history lengths (k = l = 8) and the
// frame-to-cube mapping (cube = frame number modulo 16) are this design's choices.
package aimm_pkg;

  localparam int unsigned MESH_X   = 4;
  localparam int unsigned MESH_Y   = 4;
  localparam int unsigned N_CUBES  = MESH_X * MESH_Y;
  localparam int unsigned CUBE_W   = 4;
  localparam int unsigned N_MC     = 4;
  localparam int unsigned CUBES_PER_MC = N_CUBES / N_MC;

  // 16 cubes x 1 GiB, 4 KiB pages -> 2^22 page frames.
  localparam int unsigned PAGE_W   = 22;
  localparam int unsigned LINE_BYTES = 16;          // one 128-bit link flit
  localparam int unsigned PAGE_LINES = 4096 / LINE_BYTES;

  // Feature words handed to the agent: signed Q8.8.
  localparam int unsigned FW       = 16;
  localparam int unsigned FRAC     = 8;
  typedef logic signed [FW-1:0] feat_t;

  localparam int unsigned HIST_K   = 8;             // global action history length k
  localparam int unsigned HIST_L   = 8;             // per-page history length l
  localparam int unsigned STATE_LEN = 2*N_CUBES + N_MC + HIST_K + 2 + 4*HIST_L;  // 78

  localparam int unsigned N_ACTIONS = 8;

  typedef enum logic [2:0] {
    ACT_DEFAULT    = 3'd0,   // no change
    ACT_NEAR_DATA  = 3'd1,   // page -> random neighbour of the compute cube
    ACT_FAR_DATA   = 3'd2,   // page -> diagonal opposite of the compute cube
    ACT_NEAR_COMP  = 3'd3,   // compute -> random neighbour of the compute cube
    ACT_FAR_COMP   = 3'd4,   // compute -> diagonal opposite of the compute cube
    ACT_SRC_COMP   = 3'd5,   // compute -> host cube of the first source operand
    ACT_INC_INT    = 3'd6,   // lengthen invocation interval
    ACT_DEC_INT    = 3'd7    // shorten invocation interval
  } action_e;

  typedef logic [CUBE_W-1:0] cube_t;
  typedef logic [PAGE_W-1:0] page_t;

  // Corner cube of each MC: (0,0), (3,0), (0,3), (3,3).
  function automatic cube_t mc_cube(input int unsigned m);
    case (m)
      0: return cube_t'(0);
      1: return cube_t'(MESH_X-1);
      2: return cube_t'((MESH_Y-1)*MESH_X);
      default: return cube_t'(N_CUBES-1);
    endcase
  endfunction

  // MC whose quadrant a cube belongs to.
  function automatic logic [1:0] nearest_mc(input cube_t c);
    return {c[3], c[1]};
  endfunction

  function automatic cube_t frame_cube(input page_t frame);
    return frame[CUBE_W-1:0];
  endfunction

  // Manhattan distance between two cubes = hop count under XY routing.
  function automatic logic [3:0] hops(input cube_t a, input cube_t b);
    logic [1:0] dx, dy;
    dx = (a[1:0] > b[1:0]) ? a[1:0] - b[1:0] : b[1:0] - a[1:0];
    dy = (a[3:2] > b[3:2]) ? a[3:2] - b[3:2] : b[3:2] - a[3:2];
    return {2'b00, dx} + {2'b00, dy};
  endfunction

  // Diagonal opposite cube in the 2D array.
  function automatic cube_t opposite(input cube_t c);
    return {2'(MESH_Y-1) - c[3:2], 2'(MESH_X-1) - c[1:0]};
  endfunction

  // One of the up-to-four mesh neighbours, picked by a 2-bit random value.
  // Directions that fall off the mesh are folded to the opposite direction.
  function automatic cube_t neighbour(input cube_t c, input logic [1:0] r);
    logic [1:0] x, y;
    x = c[1:0]; y = c[3:2];
    case (r)
      2'd0: x = (x == 2'(MESH_X-1)) ? x - 2'd1 : x + 2'd1;
      2'd1: x = (x == 2'd0)         ? x + 2'd1 : x - 2'd1;
      2'd2: y = (y == 2'(MESH_Y-1)) ? y - 2'd1 : y + 2'd1;
      default: y = (y == 2'd0)      ? y + 2'd1 : y - 2'd1;
    endcase
    return {y, x};
  endfunction

  // Page information cache update kinds.
  typedef enum logic [1:0] {
    UPD_ACCESS = 2'd0,   // NMP op sent: access count, hop-count history
    UPD_PKTLAT = 2'd1,   // NMP ACK: packet latency history
    UPD_MIGLAT = 2'd2,   // migration finished: migration latency history, migrations
    UPD_ACTION = 2'd3    // page chosen for an action: action history
  } upd_kind_e;

  typedef struct packed {
    upd_kind_e kind;
    page_t     page;
    logic [15:0] value;      // hop count, latency or action
    cube_t     host;         // UPD_ACCESS: host cube of the page
    cube_t     src_host;     // UPD_ACCESS: host cube of the op's first source
    logic      is_dest;      // UPD_ACCESS: page is the op's destination (written)
  } pic_update_t;

  // One page information cache entry as presented to the agent.
  typedef struct packed {
    logic        valid;
    page_t       page;
    cube_t       host;
    cube_t       src_host;
    logic        written;      // seen as a destination: read-write page
    logic [15:0] accesses;
    logic [15:0] migrations;
    logic [HIST_L-1:0][15:0] hop_hist;
    logic [HIST_L-1:0][15:0] lat_hist;
    logic [HIST_L-1:0][15:0] mig_hist;
    logic [HIST_L-1:0][15:0] act_hist;
  } page_info_t;

  // NMP operation: dest += src1 OP src2, operands named by page frame.
  typedef enum logic [1:0] {OP_ADD = 2'd0, OP_MUL = 2'd1, OP_SUB = 2'd2, OP_MAX = 2'd3} nmp_opcode_e;

  typedef struct packed {
    nmp_opcode_e op;
    page_t       dest;
    page_t       src1;
    page_t       src2;
  } nmp_op_t;

  // Scheduled op as it leaves the MC for the cube network.
  typedef struct packed {
    nmp_op_t op;
    cube_t   comp_cube;
    logic    remapped;
  } nmp_pkt_t;

  typedef struct packed {
    page_t   page;
    cube_t   new_cube;
    logic    blocking;     // read-write page: locked during migration
  } mig_req_t;

endpackage
