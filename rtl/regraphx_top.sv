// regraphx_top: the ReGraphX chip, a 3D heterogeneous ReRAM manycore for GNN training.
//
// Three tiers of NX x NY routers (noc_3d_mesh) with TILES_PER_ROUTER ReRAM
// tiles (reram_tile) on each router. The middle tier (z = V_TIER) holds
// V-PE tiles with 128x128 crossbars, used for the vertex (weight) layers of
// the GNN; the tiers above and below hold E-PE tiles with 8x8 crossbars that
// store the non-zero blocks of the graph's adjacency matrix for the edge
// (aggregation) layers. This sandwich puts every V-PE one vertical hop from
// an E-PE in both directions, and the tree-multicast routers deliver one
// layer's output to the next layer and to the backward-phase tiles at once.
//
// Interface:
//  * cfg_*: configuration bus. A write with cfg_valid goes to tile cfg_tile of
//    router (cfg_x, cfg_y, cfg_z): a crossbar row or an IMA output route
//    (see regraphx_pkg::cfg_cmd_t). Weights and adjacency blocks are mapped
//    offline and written here before training starts.
//  * io_*: the I/O port of router (IO_X, IO_Y, IO_Z), local port IO_PORT,
//    through which input features and START tokens enter and results leave,
//    as ordinary flits. The I/O ports of the other routers are unused.
//  * busy: one bit per tile, high while any of its IMAs works.
// Tile r*TILES_PER_ROUTER + t is tile t of router r = (z*NY + y)*NX + x.
// Sizes follow the paper (8 x 8 x 3 routers, 4 tiles per router, 12 IMAs per
// tile). The configuration bus and the I/O port are this design's own: the
// paper does not say how data enters or leaves the chip.
module regraphx_top
  import regraphx_pkg::*;
#(
  parameter int unsigned NX       = MESH_X,
  parameter int unsigned NY       = MESH_Y,
  parameter int unsigned NZ       = MESH_Z,
  parameter int unsigned VT       = V_TIER,
  parameter int unsigned V_SIZE   = V_XBAR_SIZE,
  parameter int unsigned V_ADC    = V_ADC_BITS,
  parameter int unsigned E_SIZE   = E_XBAR_SIZE,
  parameter int unsigned E_ADC    = E_ADC_BITS,
  parameter int unsigned IMAS     = IMAS_PER_TILE,
  parameter int unsigned IO_X     = 0,
  parameter int unsigned IO_Y     = 0,
  parameter int unsigned IO_Z     = V_TIER,
  localparam int unsigned NR = NX * NY * NZ,
  localparam int unsigned NT = NR * TILES_PER_ROUTER
) (
  input  logic             clk,
  input  logic             rst_n,
  // configuration bus
  input  logic             cfg_valid,
  input  logic [XW-1:0]    cfg_x,
  input  logic [YW-1:0]    cfg_y,
  input  logic [ZW-1:0]    cfg_z,
  input  logic [1:0]       cfg_tile,
  input  cfg_cmd_t         cfg_cmd,
  input  logic [CFG_W-1:0] cfg_data,
  // I/O port
  input  logic             io_in_valid,
  output logic             io_in_ready,
  input  flit_t            io_in_flit,
  output logic             io_out_valid,
  input  logic             io_out_ready,
  output flit_t            io_out_flit,
  // status
  output logic [NT-1:0]    busy
);

  localparam int unsigned IO_R = (IO_Z * NY + IO_Y) * NX + IO_X;

  logic [IMAS-1:0] busy_ima [NT];

  logic  l_in_valid  [NR][NUM_LOCAL];
  logic  l_in_ready  [NR][NUM_LOCAL];
  flit_t l_in_flit   [NR][NUM_LOCAL];
  logic  l_out_valid [NR][NUM_LOCAL];
  logic  l_out_ready [NR][NUM_LOCAL];
  flit_t l_out_flit  [NR][NUM_LOCAL];

  noc_3d_mesh #(.NX(NX), .NY(NY), .NZ(NZ)) u_noc (
    .clk          (clk),
    .rst_n        (rst_n),
    .loc_in_valid (l_in_valid),
    .loc_in_ready (l_in_ready),
    .loc_in_flit  (l_in_flit),
    .loc_out_valid(l_out_valid),
    .loc_out_ready(l_out_ready),
    .loc_out_flit (l_out_flit)
  );

  for (genvar z = 0; z < NZ; z++) begin : g_z
    for (genvar y = 0; y < NY; y++) begin : g_y
      for (genvar x = 0; x < NX; x++) begin : g_x
        localparam int unsigned R = (z * NY + y) * NX + x;

        for (genvar t = 0; t < TILES_PER_ROUTER; t++) begin : g_t
          logic sel;
          assign sel = cfg_valid && cfg_x == XW'(x) && cfg_y == YW'(y) &&
                       cfg_z == ZW'(z) && cfg_tile == 2'(t);
          if (z == VT) begin : g_vpe
            reram_tile #(.ROWS(V_SIZE), .COLS(V_SIZE), .ADC_BITS(V_ADC), .IMAS(IMAS)) u_tile (
              .clk      (clk),
              .rst_n    (rst_n),
              .cfg_valid(sel),
              .cfg_cmd  (cfg_cmd),
              .cfg_data (cfg_data),
              .in_valid (l_out_valid[R][t]),
              .in_ready (l_out_ready[R][t]),
              .in_flit  (l_out_flit[R][t]),
              .out_valid(l_in_valid[R][t]),
              .out_ready(l_in_ready[R][t]),
              .out_flit (l_in_flit[R][t]),
              .ima_busy (busy_ima[R*TILES_PER_ROUTER+t])
            );
          end else begin : g_epe
            reram_tile #(.ROWS(E_SIZE), .COLS(E_SIZE), .ADC_BITS(E_ADC), .IMAS(IMAS)) u_tile (
              .clk      (clk),
              .rst_n    (rst_n),
              .cfg_valid(sel),
              .cfg_cmd  (cfg_cmd),
              .cfg_data (cfg_data),
              .in_valid (l_out_valid[R][t]),
              .in_ready (l_out_ready[R][t]),
              .in_flit  (l_out_flit[R][t]),
              .out_valid(l_in_valid[R][t]),
              .out_ready(l_in_ready[R][t]),
              .out_flit (l_in_flit[R][t]),
              .ima_busy (busy_ima[R*TILES_PER_ROUTER+t])
            );
          end
          assign busy[R*TILES_PER_ROUTER+t] = |busy_ima[R*TILES_PER_ROUTER+t];
        end

        // I/O port
        if (R == IO_R) begin : g_io
          assign l_in_valid[R][IO_PORT]  = io_in_valid;
          assign l_in_flit[R][IO_PORT]   = io_in_flit;
          assign io_in_ready             = l_in_ready[R][IO_PORT];
          assign io_out_valid            = l_out_valid[R][IO_PORT];
          assign io_out_flit             = l_out_flit[R][IO_PORT];
          assign l_out_ready[R][IO_PORT] = io_out_ready;
        end else begin : g_noio
          assign l_in_valid[R][IO_PORT]  = 1'b0;
          assign l_in_flit[R][IO_PORT]   = '0;
          assign l_out_ready[R][IO_PORT] = 1'b1;
        end
      end
    end
  end

endmodule
