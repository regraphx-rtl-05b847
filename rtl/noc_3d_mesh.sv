// noc_3d_mesh: the 3D mesh network-on-chip.
//
// NX x NY x NZ noc_router_3d instances; router (x, y, z) has index
// r = (z*NY + y)*NX + x. Neighbours in x and y are joined by planar links and
// neighbours in z by vertical links (through-silicon vias in the real chip),
// so a V-PE in the middle tier is one hop from the E-PEs above and below it.
// Ports that would leave the mesh are tied off: nothing enters them and
// whatever is offered there is accepted and dropped (the assertion below
// flags it, as only a destination box outside the mesh can cause it).
// The local ports of every router are brought out as arrays indexed
// [router][local port]. The 3D mesh, the three tiers and the 8 x 8 routers per
// tier follow the paper; the link protocol (valid/ready, one flit per clock)
// is this design's own choice.
module noc_3d_mesh
  import regraphx_pkg::*;
#(
  parameter int unsigned NX         = MESH_X,
  parameter int unsigned NY         = MESH_Y,
  parameter int unsigned NZ         = MESH_Z,
  parameter int unsigned FIFO_DEPTH = 4,
  localparam int unsigned NR = NX * NY * NZ
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  loc_in_valid  [NR][NUM_LOCAL],
  output logic  loc_in_ready  [NR][NUM_LOCAL],
  input  flit_t loc_in_flit   [NR][NUM_LOCAL],
  output logic  loc_out_valid [NR][NUM_LOCAL],
  input  logic  loc_out_ready [NR][NUM_LOCAL],
  output flit_t loc_out_flit  [NR][NUM_LOCAL]
);

  logic  i_valid [NR][NUM_PORTS];
  logic  i_ready [NR][NUM_PORTS];
  flit_t i_flit  [NR][NUM_PORTS];
  logic  o_valid [NR][NUM_PORTS];
  logic  o_ready [NR][NUM_PORTS];
  flit_t o_flit  [NR][NUM_PORTS];

  for (genvar z = 0; z < NZ; z++) begin : g_z
    for (genvar y = 0; y < NY; y++) begin : g_y
      for (genvar x = 0; x < NX; x++) begin : g_x
        localparam int unsigned R = (z * NY + y) * NX + x;

        noc_router_3d #(.FIFO_DEPTH(FIFO_DEPTH)) u_router (
          .clk      (clk),
          .rst_n    (rst_n),
          .my_x     (XW'(x)),
          .my_y     (YW'(y)),
          .my_z     (ZW'(z)),
          .in_valid (i_valid[R]),
          .in_ready (i_ready[R]),
          .in_flit  (i_flit[R]),
          .out_valid(o_valid[R]),
          .out_ready(o_ready[R]),
          .out_flit (o_flit[R])
        );

        // neighbour link for each direction: input d of R is output opp(d) of the neighbour
        if (x + 1 < NX) begin : g_xp
          assign i_valid[R][P_XP] = o_valid[R+1][P_XM];
          assign i_flit [R][P_XP] = o_flit [R+1][P_XM];
          assign o_ready[R][P_XP] = i_ready[R+1][P_XM];
        end else begin : g_xp_edge
          assign i_valid[R][P_XP] = 1'b0;
          assign i_flit [R][P_XP] = '0;
          assign o_ready[R][P_XP] = 1'b1;
        end
        if (x > 0) begin : g_xm
          assign i_valid[R][P_XM] = o_valid[R-1][P_XP];
          assign i_flit [R][P_XM] = o_flit [R-1][P_XP];
          assign o_ready[R][P_XM] = i_ready[R-1][P_XP];
        end else begin : g_xm_edge
          assign i_valid[R][P_XM] = 1'b0;
          assign i_flit [R][P_XM] = '0;
          assign o_ready[R][P_XM] = 1'b1;
        end
        if (y + 1 < NY) begin : g_yp
          assign i_valid[R][P_YP] = o_valid[R+NX][P_YM];
          assign i_flit [R][P_YP] = o_flit [R+NX][P_YM];
          assign o_ready[R][P_YP] = i_ready[R+NX][P_YM];
        end else begin : g_yp_edge
          assign i_valid[R][P_YP] = 1'b0;
          assign i_flit [R][P_YP] = '0;
          assign o_ready[R][P_YP] = 1'b1;
        end
        if (y > 0) begin : g_ym
          assign i_valid[R][P_YM] = o_valid[R-NX][P_YP];
          assign i_flit [R][P_YM] = o_flit [R-NX][P_YP];
          assign o_ready[R][P_YM] = i_ready[R-NX][P_YP];
        end else begin : g_ym_edge
          assign i_valid[R][P_YM] = 1'b0;
          assign i_flit [R][P_YM] = '0;
          assign o_ready[R][P_YM] = 1'b1;
        end
        if (z + 1 < NZ) begin : g_zp
          assign i_valid[R][P_ZP] = o_valid[R+NX*NY][P_ZM];
          assign i_flit [R][P_ZP] = o_flit [R+NX*NY][P_ZM];
          assign o_ready[R][P_ZP] = i_ready[R+NX*NY][P_ZM];
        end else begin : g_zp_edge
          assign i_valid[R][P_ZP] = 1'b0;
          assign i_flit [R][P_ZP] = '0;
          assign o_ready[R][P_ZP] = 1'b1;
        end
        if (z > 0) begin : g_zm
          assign i_valid[R][P_ZM] = o_valid[R-NX*NY][P_ZP];
          assign i_flit [R][P_ZM] = o_flit [R-NX*NY][P_ZP];
          assign o_ready[R][P_ZM] = i_ready[R-NX*NY][P_ZP];
        end else begin : g_zm_edge
          assign i_valid[R][P_ZM] = 1'b0;
          assign i_flit [R][P_ZM] = '0;
          assign o_ready[R][P_ZM] = 1'b1;
        end

        for (genvar l = 0; l < NUM_LOCAL; l++) begin : g_loc
          assign i_valid[R][NUM_DIRS+l]  = loc_in_valid[R][l];
          assign i_flit [R][NUM_DIRS+l]  = loc_in_flit[R][l];
          assign loc_in_ready[R][l]      = i_ready[R][NUM_DIRS+l];
          assign loc_out_valid[R][l]     = o_valid[R][NUM_DIRS+l];
          assign loc_out_flit[R][l]      = o_flit[R][NUM_DIRS+l];
          assign o_ready[R][NUM_DIRS+l]  = loc_out_ready[R][l];
        end

        a_no_edge_xp: assert property (@(posedge clk) disable iff (!rst_n)
          (x + 1 >= NX) |-> !o_valid[R][P_XP]);
        a_no_edge_xm: assert property (@(posedge clk) disable iff (!rst_n)
          (x == 0) |-> !o_valid[R][P_XM]);
      end
    end
  end

endmodule
