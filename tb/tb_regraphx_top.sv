// tb_regraphx_top: one GCN layer pair, V then E then V, end to end through
// the chip, at a reduced size (2 x 2 routers per tier, 3 tiers, 16 x 16 V-PE
// crossbars, 8 x 8 E-PE crossbars, 2 IMAs per tile).
//
// Mapping (all routes set through the configuration bus):
//   V1  = tile 3 of router (0,0,1), IMA 0: Y = W1^T X (16 x 16 weights).
//         Its results are multicast to tiles 0 and 1 of routers (0,0,z) for
//         all three tiers; each receiving IMA keeps only its index window.
//   E   = the 16 x 16 adjacency matrix cut into 8 x 8 blocks. The all-zero
//         block is not mapped; the other three sit on E-PE tiles of tiers 0
//         and 2 and send their partial sums (CMD_ACC) to V2.
//   V2  = tile 0 of router (1,0,1), IMA 0: waits for the three START tokens,
//         then O = W2^T Z, sent to the I/O port.
// Two input vectors (two sub-graphs) are pushed through back to back, so V1
// works on the second while E and V2 work on the first. Every result is
// compared with integer arithmetic done here: Y = W1^T X, each block's
// partial floor((A_blk Y_blk) / 16), Z = sum of partials, O = floor(W2^T Z / 256).
// The mechanisms are counted and each must occur: multicast copies, copies
// dropped by index window or idle IMA, partial-sum accumulation, the
// three-token join, pipeline overlap of V1 with V2, and I/O back-pressure.
module tb_regraphx_top;
  import regraphx_pkg::*;
  localparam int NX = 2, NY = 2, NZ = 3, VS = 16, ES = 8, IM = 2;
  localparam int NR = NX*NY*NZ, NT = NR*4;
  localparam int G = 2;   // sub-graphs
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cfg_valid; logic [2:0] cfg_x, cfg_y; logic [1:0] cfg_z, cfg_tile;
  cfg_cmd_t cfg_cmd; logic [CFG_W-1:0] cfg_data;
  logic io_in_valid, io_in_ready, io_out_valid, io_out_ready;
  flit_t io_in_flit, io_out_flit;
  logic [NT-1:0] busy;

  regraphx_top #(.NX(NX), .NY(NY), .NZ(NZ), .V_SIZE(VS), .E_SIZE(ES), .IMAS(IM)) dut (.*);

  int unsigned W1 [VS][VS], W2 [VS][VS], A [VS][VS];
  int unsigned X [G][VS], Y [G][VS], Z [G][VS], O [G][VS];
  int got [G];
  int starts_at_io = 0, checks = 0, failures = 0;
  int n_mcast = 0, n_dropped = 0, n_acc = 0, n_overlap = 0, n_stall = 0, n_skipped = 0;
  int v2_tokens = 0, join_ok = 0, cur_g = 0;

  localparam int V1_T = (1*NX*NY + 0)*4 + 3;   // router (0,0,1) tile 3
  localparam int V2_R = 1*NX*NY + 1, V2_T = V2_R*4;   // router (1,0,1) tile 0

  initial begin : watchdog
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  task automatic cfg_write(input int x, y, z, t, input cfg_kind_e kind, input int ima,
                           input int xbar, input int row, input logic [CFG_W-1:0] data);
    @(negedge clk);
    cfg_valid = 1; cfg_x = 3'(x); cfg_y = 3'(y); cfg_z = 2'(z); cfg_tile = 2'(t);
    cfg_cmd = '0; cfg_cmd.kind = kind; cfg_cmd.ima = 4'(ima); cfg_cmd.xbar = 3'(xbar);
    cfg_cmd.row = 7'(row); cfg_data = data;
    @(negedge clk); cfg_valid = 0;
  endtask

  task automatic program_v(input int x, y, z, t, input int unsigned m [VS][VS]);
    for (int k = 0; k < 8; k++)
      for (int r = 0; r < VS; r++) begin
        logic [CFG_W-1:0] d;
        d = '0;
        for (int c = 0; c < VS; c++) d[c*2 +: 2] = 2'(m[r][c] >> (2*k));
        cfg_write(x, y, z, t, CFG_XBAR_ROW, 0, k, r, d);
      end
  endtask

  // adjacency block (rb, cb): cell (row j, column i) = A[rb*8+i][cb*8+j], slice 0 only
  task automatic program_e(input int x, y, z, t, input int rb, cb);
    for (int k = 0; k < 8; k++)
      for (int j = 0; j < ES; j++) begin
        logic [CFG_W-1:0] d;
        d = '0;
        if (k == 0) for (int i = 0; i < ES; i++) d[i*2 +: 2] = 2'(A[rb*ES+i][cb*ES+j]);
        cfg_write(x, y, z, t, CFG_XBAR_ROW, 0, k, j, d);
      end
  endtask

  function automatic logic [CFG_W-1:0] imacfg(input int in_base, starts, shift, acc,
      input int xl, xh, zl, zh, mask, dst_idx);
    ima_cfg_t c;
    logic [CFG_W-1:0] d;
    c = '0; c.in_en = 1; c.in_base = 7'(in_base); c.enable = 1; c.use_acc = acc[0];
    c.send_start = 1; c.starts_needed = 4'(starts); c.shift = 6'(shift);
    c.x_lo = 3'(xl); c.x_hi = 3'(xh); c.y_lo = 0; c.y_hi = 0; c.z_lo = 2'(zl); c.z_hi = 2'(zh);
    c.port_mask = 5'(mask); c.dst_ima = 0; c.idx_base = 7'(dst_idx);
    d = '0; d[$bits(ima_cfg_t)-1:0] = c;
    return d;
  endfunction

  task automatic send_io(input cmd_e cmd, input int index, input int data);
    @(negedge clk);
    io_in_valid = 1; io_in_flit = '0;
    io_in_flit.x_lo = 0; io_in_flit.x_hi = 0; io_in_flit.y_lo = 0; io_in_flit.y_hi = 0;
    io_in_flit.z_lo = 1; io_in_flit.z_hi = 1; io_in_flit.port_mask = 5'b01000;
    io_in_flit.cmd = cmd; io_in_flit.ima = 0; io_in_flit.index = 7'(index); io_in_flit.data = 16'(data);
    @(posedge clk);
    while (!io_in_ready) @(posedge clk);
    @(negedge clk); io_in_valid = 0;
  endtask

  // ---- monitors
  always @(posedge clk) if (rst_n) begin
    // multicast copies of V1's results and copies dropped by the receivers
    for (int r = 0; r < NR; r++)
      for (int t = 0; t < 2; t++)
        if (dut.l_out_valid[r][t] && dut.l_out_ready[r][t] && dut.l_out_flit[r][t].cmd == CMD_WRITE &&
            (r % (NX*NY)) == 0) begin
          n_mcast++;
          if (r == NX*NY || (r == 2*NX*NY && t == 1) || (r == 0 && t == 1 && 0)) n_dropped++;
        end
    // partial sums and tokens arriving at V2
    if (dut.l_out_valid[V2_R][0] && dut.l_out_ready[V2_R][0]) begin
      if (dut.l_out_flit[V2_R][0].cmd == CMD_ACC) n_acc++;
      if (dut.l_out_flit[V2_R][0].cmd == CMD_START) begin
        v2_tokens++;
        if (v2_tokens % 3 != 0) check(!busy[V2_T] || v2_tokens > 3, "V2 must wait for all three tokens");
        else join_ok++;
      end
    end
    if (busy[V1_T] && busy[V2_T]) n_overlap++;
    if (io_out_valid && !io_out_ready) n_stall++;
    // results at the I/O port
    if (io_out_valid && io_out_ready) begin
      if (io_out_flit.cmd == CMD_START) begin
        check(got[cur_g] == VS, $sformatf("START after %0d results of sub-graph %0d", got[cur_g], cur_g));
        starts_at_io++;
        cur_g++;
      end else if (cur_g < G) begin
        int i;
        i = io_out_flit.index;
        check(io_out_flit.data == 16'(O[cur_g][i]),
              $sformatf("G%0d O[%0d] = %0d, expected %0d", cur_g, i, io_out_flit.data, O[cur_g][i]));
        got[cur_g]++;
      end else check(0, "extra result flit");
    end
  end

  initial begin
    cfg_valid = 0; cfg_x = 0; cfg_y = 0; cfg_z = 0; cfg_tile = 0; cfg_cmd = '0; cfg_data = '0;
    io_in_valid = 0; io_in_flit = '0; io_out_ready = 1;
    for (int g = 0; g < G; g++) got[g] = 0;
    // ---- problem data
    for (int r = 0; r < VS; r++)
      for (int c = 0; c < VS; c++) begin
        W1[r][c] = $urandom_range(0, 15);
        W2[r][c] = $urandom_range(0, 15);
        A[r][c]  = ($urandom_range(0, 2) == 0) ? 1 : 0;
      end
    for (int i = 8; i < 16; i++) for (int j = 0; j < 8; j++) A[i][j] = 0;   // block (1,0) is all zero
    for (int g = 0; g < G; g++) for (int r = 0; r < VS; r++) X[g][r] = $urandom_range(0, 255);
    for (int g = 0; g < G; g++) begin
      for (int c = 0; c < VS; c++) begin
        Y[g][c] = 0;
        for (int r = 0; r < VS; r++) Y[g][c] += W1[r][c] * X[g][r];
      end
      for (int i = 0; i < VS; i++) begin
        Z[g][i] = 0;
        for (int cb = 0; cb < 2; cb++) begin
          int unsigned p;
          p = 0;
          for (int j = 0; j < ES; j++) p += A[i][cb*ES+j] * Y[g][cb*ES+j];
          Z[g][i] += p >> 4;
        end
      end
      for (int c = 0; c < VS; c++) begin
        longint unsigned o;
        o = 0;
        for (int r = 0; r < VS; r++) o += longint'(W2[r][c]) * Z[g][r];
        O[g][c] = int'(o >> 8);
        check(O[g][c] < 65536 && Y[g][c] < 65536 && Z[g][c] < 65536, "test data stays below saturation");
      end
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // ---- configuration: crossbars
    program_v(0, 0, 1, 3, W1);
    program_v(1, 0, 1, 0, W2);
    program_e(0, 0, 2, 0, 0, 0);
    program_e(0, 0, 0, 0, 0, 1);
    program_e(0, 0, 0, 1, 1, 1);
    for (int rb = 0; rb < 2; rb++)
      for (int cb = 0; cb < 2; cb++) begin
        bit nz;
        nz = 0;
        for (int i = 0; i < ES; i++) for (int j = 0; j < ES; j++) if (A[rb*ES+i][cb*ES+j] != 0) nz = 1;
        if (!nz) n_skipped++;
      end
    check(n_skipped == 1, "one all-zero adjacency block left unmapped");
    // ---- configuration: routes
    cfg_write(0, 0, 1, 3, CFG_OUT, 0, 0, 0, imacfg(0, 1, 0, 0, 0, 0, 0, 2, 5'b00011, 0));  // V1 -> E multicast
    cfg_write(0, 0, 2, 0, CFG_OUT, 0, 0, 0, imacfg(0, 1, 4, 1, 1, 1, 1, 1, 5'b00001, 0));  // E(0,0) -> V2 rows 0..7
    cfg_write(0, 0, 0, 0, CFG_OUT, 0, 0, 0, imacfg(8, 1, 4, 1, 1, 1, 1, 1, 5'b00001, 0));  // E(0,1) -> V2 rows 0..7
    cfg_write(0, 0, 0, 1, CFG_OUT, 0, 0, 0, imacfg(8, 1, 4, 1, 1, 1, 1, 1, 5'b00001, 8));  // E(1,1) -> V2 rows 8..15
    cfg_write(1, 0, 1, 0, CFG_OUT, 0, 0, 0, imacfg(0, 3, 8, 0, 0, 0, 1, 1, 5'b10000, 0));  // V2 -> I/O port
    // ---- run two sub-graphs
    for (int g = 0; g < G; g++) begin
      if (g > 0) while (!busy[V1_T] || dut.g_z[1].g_y[0].g_x[0].g_t[3].g_vpe.u_tile.loading) @(negedge clk);
      for (int r = 0; r < VS; r++) send_io(CMD_WRITE, r, X[g][r]);
      send_io(CMD_START, 0, 0);
    end
    for (int t = 0; t < 30000 && starts_at_io < G; t++) begin
      @(negedge clk);
      io_out_ready = ($urandom_range(0, 3) != 0);
    end
    io_out_ready = 1;
    repeat (20) @(negedge clk);
    check(starts_at_io == G, $sformatf("%0d of %0d sub-graphs finished", starts_at_io, G));
    for (int g = 0; g < G; g++) check(got[g] == VS, $sformatf("sub-graph %0d: %0d results", g, got[g]));
    check(n_mcast == G * VS * 6, $sformatf("multicast copies %0d, expected %0d", n_mcast, G*VS*6));
    check(n_dropped > 0, "copies dropped by receivers");
    check(n_acc == G * VS * 3 / 2, $sformatf("partial sums at V2 %0d, expected %0d", n_acc, G*VS*3/2));
    check(join_ok == G, "three-token join happened for each sub-graph");
    check(n_overlap > 0, "V1 and V2 worked at the same time (pipeline)");
    check(n_stall > 0, "I/O back-pressure");
    $display("mechanisms: multicast copies %0d, dropped %0d, partial sums %0d, joins %0d, overlap cycles %0d, io stalls %0d, zero blocks skipped %0d",
             n_mcast, n_dropped, n_acc, join_ok, n_overlap, n_stall, n_skipped);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
