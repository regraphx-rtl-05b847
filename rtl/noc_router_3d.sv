// noc_router_3d: router of the 3D mesh NoC with tree multicast.
//
// Ports 0..5 lead to the +x, -x, +y, -y, +z and -z neighbours (vertical links
// for z); ports 6.. are local: the router's tiles, then one I/O port. Each
// input port has a flit_fifo. Every flit names a destination box of routers
// and a mask of local ports; the router forwards it along a dimension-ordered
// tree (x, then y, then z):
//   x phase (flit injected here, or arriving from an x neighbour): go +x while
//     x < x_hi, go -x while x > x_lo, never back where it came from; if this
//     router's x lies inside the box, also start the y phase here;
//   y phase (from a y neighbour, or started here): the same along y, and start
//     the z phase when y lies inside the box;
//   z phase (from a z neighbour, or started here): the same along z, and
//     deliver to the local ports in port_mask when z lies inside the box.
// Each router inside the box receives exactly one copy, and a one-router box
// is a plain dimension-ordered unicast. A flit at the head of an input FIFO is
// copied to each of its outputs as soon as that output is free (each output
// has a round-robin arbiter over the inputs); it leaves the FIFO once every
// copy has been sent. Channel dependencies only go from x to y to z to local,
// so the network cannot deadlock as long as the local ports drain.
// Timing: one clock per hop when the path is free (FIFO write, then switch).
// The paper gives the 3D mesh and says it uses tree multicast; the routing
// order, the box encoding, FIFO depth and arbitration are this design's own.
module noc_router_3d
  import regraphx_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 4
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [XW-1:0] my_x,
  input  logic [YW-1:0] my_y,
  input  logic [ZW-1:0] my_z,
  input  logic          in_valid  [NUM_PORTS],
  output logic          in_ready  [NUM_PORTS],
  input  flit_t         in_flit   [NUM_PORTS],
  output logic          out_valid [NUM_PORTS],
  input  logic          out_ready [NUM_PORTS],
  output flit_t         out_flit  [NUM_PORTS]
);

  localparam int unsigned P = NUM_PORTS;

  // which outputs a flit arriving on input port `p` must be copied to
  function automatic logic [P-1:0] route(input int unsigned p, input flit_t f,
                                         input logic [XW-1:0] x, input logic [YW-1:0] y,
                                         input logic [ZW-1:0] z);
    logic [P-1:0] o;
    logic in_x, in_y, in_z;
    logic ph_x, ph_y, ph_z;
    o    = '0;
    in_x = (x >= f.x_lo) && (x <= f.x_hi);
    in_y = (y >= f.y_lo) && (y <= f.y_hi);
    in_z = (z >= f.z_lo) && (z <= f.z_hi);
    ph_x = (p >= NUM_DIRS) || p == int'(P_XP) || p == int'(P_XM);
    ph_y = (p == int'(P_YP) || p == int'(P_YM)) || (ph_x && in_x);
    ph_z = (p == int'(P_ZP) || p == int'(P_ZM)) || (ph_y && in_y);
    if (ph_x) begin
      if (x < f.x_hi && p != int'(P_XP)) o[P_XP] = 1'b1;
      if (x > f.x_lo && p != int'(P_XM)) o[P_XM] = 1'b1;
    end
    if (ph_y) begin
      if (y < f.y_hi && p != int'(P_YP)) o[P_YP] = 1'b1;
      if (y > f.y_lo && p != int'(P_YM)) o[P_YM] = 1'b1;
    end
    if (ph_z) begin
      if (z < f.z_hi && p != int'(P_ZP)) o[P_ZP] = 1'b1;
      if (z > f.z_lo && p != int'(P_ZM)) o[P_ZM] = 1'b1;
      if (in_z) o[P-1:NUM_DIRS] = f.port_mask;
    end
    return o;
  endfunction

  logic         hd_valid [P];
  logic         hd_pop   [P];
  flit_t        hd_flit  [P];
  logic [P-1:0] served   [P];   // served[i][o]: copy for output o already sent
  logic [P-1:0] want     [P];   // want[i][o]: input i still needs output o
  logic [P-1:0] req      [P];   // req[o][i]: input i requests output o
  logic [P-1:0] gnt      [P];   // gnt[o][i]
  logic [P-1:0] sent     [P];   // sent[i][o]: copy handed over this cycle

  for (genvar i = 0; i < P; i++) begin : g_in
    flit_fifo #(.DEPTH(FIFO_DEPTH)) u_fifo (
      .clk      (clk),
      .rst_n    (rst_n),
      .in_valid (in_valid[i]),
      .in_ready (in_ready[i]),
      .in_data  (in_flit[i]),
      .out_valid(hd_valid[i]),
      .out_ready(hd_pop[i]),
      .out_data (hd_flit[i])
    );
    assign want[i] = hd_valid[i] ? (route(i, hd_flit[i], my_x, my_y, my_z) & ~served[i]) : '0;
  end

  always_comb begin
    for (int o = 0; o < P; o++)
      for (int i = 0; i < P; i++) req[o][i] = want[i][o];
  end

  for (genvar o = 0; o < P; o++) begin : g_out
    rr_arbiter #(.N(P)) u_arb (
      .clk    (clk),
      .rst_n  (rst_n),
      .req    (req[o]),
      .advance(out_ready[o]),
      .gnt    (gnt[o])
    );
    always_comb begin
      out_valid[o] = (gnt[o] != '0);
      out_flit[o]  = '0;
      for (int i = 0; i < P; i++) if (gnt[o][i]) out_flit[o] = hd_flit[i];
    end
  end

  always_comb begin
    for (int i = 0; i < P; i++) begin
      for (int o = 0; o < P; o++) sent[i][o] = gnt[o][i] && out_ready[o];
      hd_pop[i] = hd_valid[i] && ((want[i] & ~sent[i]) == '0);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < P; i++) served[i] <= '0;
    end else begin
      for (int i = 0; i < P; i++)
        served[i] <= hd_pop[i] ? '0 : (served[i] | sent[i]);
    end
  end

  // a flit offered on an output stays until the neighbour takes it
  for (genvar o = 0; o < P; o++) begin : g_chk
    a_hold: assert property (@(posedge clk) disable iff (!rst_n)
      out_valid[o] && !out_ready[o] |=> out_valid[o]);
  end

endmodule
