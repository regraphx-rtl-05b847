// regraphx_pkg: constants and types shared by the ReGraphX blocks.
//
// The chip is a 3D mesh of routers, MESH_X x MESH_Y routers per tier and
// MESH_Z tiers (8 x 8 x 3: one V-PE tier sandwiched between two E-PE tiers).
// Each router serves TILES_PER_ROUTER ReRAM tiles; each tile holds
// IMAS_PER_TILE in-situ multiply-accumulate units. These numbers follow the
// paper's parameter table. Everything else here (flit format, value widths,
// configuration encoding) is this design's own choice, because the paper does
// not specify it.
//
// Flit: every NoC packet is a single flit. Its destination is an axis-aligned
// box of routers [x_lo..x_hi] x [y_lo..y_hi] x [z_lo..z_hi] plus a mask of
// local ports inside each of those routers. A one-router box is a unicast; a
// larger box is a tree multicast (see noc_router_3d).
package regraphx_pkg;

  // ---- system size (paper: 64 routers per tier, 3 tiers, 4 tiles/router)
  localparam int unsigned MESH_X           = 8;
  localparam int unsigned MESH_Y           = 8;
  localparam int unsigned MESH_Z           = 3;
  localparam int unsigned TILES_PER_ROUTER = 4;
  localparam int unsigned IMAS_PER_TILE    = 12;
  localparam int unsigned XBARS_PER_IMA    = 8;
  localparam int unsigned CELL_BITS        = 2;   // "2-bit resolution"

  // ---- crossbar geometry (paper: V-PE 128x128 / 8-bit ADC, E-PE 8x8 / 6-bit ADC)
  localparam int unsigned V_XBAR_SIZE = 128;
  localparam int unsigned V_ADC_BITS  = 8;
  localparam int unsigned E_XBAR_SIZE = 8;
  localparam int unsigned E_ADC_BITS  = 6;
  localparam int unsigned V_TIER      = 1;        // middle tier holds the V-PEs

  // ---- value widths (own choice)
  localparam int unsigned DATA_W   = 16;                          // activation width
  localparam int unsigned WEIGHT_W = CELL_BITS * XBARS_PER_IMA;   // 16-bit weights, one 2-bit slice per crossbar
  localparam int unsigned ACC_W    = 40;                          // IMA output accumulator

  // ---- local ports of a router: the tiles, then one I/O port
  localparam int unsigned NUM_LOCAL = TILES_PER_ROUTER + 1;
  localparam int unsigned IO_PORT   = TILES_PER_ROUTER;

  localparam int unsigned XW   = 3;   // coordinate widths: up to 8 x 8 x 4
  localparam int unsigned YW   = 3;
  localparam int unsigned ZW   = 2;
  localparam int unsigned IMAW = 4;
  localparam int unsigned IDXW = 7;   // element index inside a 128-entry vector

  typedef enum logic [1:0] {
    CMD_WRITE = 2'd0,   // write data into the tile buffer at (ima, index)
    CMD_ACC   = 2'd1,   // add data to the tile buffer word at (ima, index)
    CMD_START = 2'd2    // one "inputs complete" token for IMA ima
  } cmd_e;

  typedef struct packed {
    logic [XW-1:0]        x_lo, x_hi;
    logic [YW-1:0]        y_lo, y_hi;
    logic [ZW-1:0]        z_lo, z_hi;
    logic [NUM_LOCAL-1:0] port_mask;
    cmd_e                 cmd;
    logic [IMAW-1:0]      ima;
    logic [IDXW-1:0]      index;
    logic [DATA_W-1:0]    data;
  } flit_t;

  // ---- router ports: 6 mesh directions followed by the local ports
  typedef enum logic [3:0] {
    P_XP = 4'd0, P_XM = 4'd1, P_YP = 4'd2, P_YM = 4'd3, P_ZP = 4'd4, P_ZM = 4'd5
  } dir_e;
  localparam int unsigned NUM_DIRS  = 6;
  localparam int unsigned NUM_PORTS = NUM_DIRS + NUM_LOCAL;

  // ---- configuration bus (weights / adjacency blocks and tile output setup)
  localparam int unsigned CFG_W = V_XBAR_SIZE * CELL_BITS;   // one crossbar row of 2-bit cells

  typedef enum logic [1:0] {
    CFG_XBAR_ROW = 2'd0,   // cfg_data[COLS*2-1:0] = one row of crossbar `xbar` of IMA `ima`
    CFG_OUT      = 2'd1    // cfg_data[$bits(ima_cfg_t)-1:0] = setup of IMA `ima` (ima_cfg_t)
  } cfg_kind_e;

  typedef struct packed {
    cfg_kind_e       kind;
    logic [IMAW-1:0] ima;
    logic [2:0]      xbar;
    logic [IDXW-1:0] row;
  } cfg_cmd_t;

  // Per-IMA setup: which arriving flits the IMA accepts, where its results
  // go and how they are scaled to DATA_W bits.
  typedef struct packed {
    logic                 in_en;        // accept flits addressed to this IMA
    logic [IDXW-1:0]      in_base;      // accept index in_base .. in_base+ROWS-1
    logic                 enable;       // send results at all
    logic                 use_acc;      // CMD_ACC (partial sums) instead of CMD_WRITE
    logic                 send_start;   // follow the results with a CMD_START token
    logic [3:0]           starts_needed;// START tokens this IMA waits for (0 counts as 1)
    logic [5:0]           shift;        // result >> shift, then saturate to DATA_W
    logic [XW-1:0]        x_lo, x_hi;
    logic [YW-1:0]        y_lo, y_hi;
    logic [ZW-1:0]        z_lo, z_hi;
    logic [NUM_LOCAL-1:0] port_mask;
    logic [IMAW-1:0]      dst_ima;
    logic [IDXW-1:0]      idx_base;     // result column c goes to index idx_base + c
  } ima_cfg_t;

endpackage
