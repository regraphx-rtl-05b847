// tb_noc_router_3d: checks one router placed at (1,1,1) of a 3 x 3 x 3 mesh.
// Part 1: single flits with random destination boxes enter on random ports;
// the outputs each flit leaves on are compared with the set expected from the
// tree rule: keep moving away from the input along the current dimension
// while the box extends further, branch into the next dimension where the
// router lies inside the box's range, and deliver to the port mask when
// inside the box in all three dimensions. Random output stalls are applied.
// Part 2: several inputs send to one output at once; every flit must leave
// exactly once and the output must be shared by all of them.
module tb_noc_router_3d;
  import regraphx_pkg::*;
  localparam int P = NUM_PORTS;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic  in_valid [P], in_ready [P], out_valid [P], out_ready [P];
  flit_t in_flit [P], out_flit [P];
  int checks = 0, failures = 0, multicast_seen = 0, stalls = 0;

  noc_router_3d #(.FIFO_DEPTH(4)) dut (
    .clk(clk), .rst_n(rst_n), .my_x(3'd1), .my_y(3'd1), .my_z(2'd1),
    .in_valid(in_valid), .in_ready(in_ready), .in_flit(in_flit),
    .out_valid(out_valid), .out_ready(out_ready), .out_flit(out_flit));

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // count flits handed over on each output (by data id)
  int unsigned seen_id [P][$];
  always @(posedge clk)
    for (int o = 0; o < P; o++)
      if (rst_n && out_valid[o] && out_ready[o]) seen_id[o].push_back(out_flit[o].data);

  function automatic logic [P-1:0] expected(int p, flit_t f);
    logic [P-1:0] e;
    int x = 1, y = 1, z = 1;
    bit in_x, in_y, in_z, from_x, from_y, from_z;
    e = '0;
    from_x = (p >= 6) || p == 0 || p == 1;
    from_y = (p == 2 || p == 3);
    from_z = (p == 4 || p == 5);
    in_x = x >= f.x_lo && x <= f.x_hi;
    in_y = y >= f.y_lo && y <= f.y_hi;
    in_z = z >= f.z_lo && z <= f.z_hi;
    if (from_x) begin
      // arriving from the +x neighbour (port 0) means moving towards -x
      if (f.x_hi > x && p != 0) e[0] = 1;
      if (f.x_lo < x && p != 1) e[1] = 1;
      if (in_x) from_y = 1;
    end
    if (from_y) begin
      if (f.y_hi > y && p != 2) e[2] = 1;
      if (f.y_lo < y && p != 3) e[3] = 1;
      if (in_y) from_z = 1;
    end
    if (from_z) begin
      if (f.z_hi > z && p != 4) e[4] = 1;
      if (f.z_lo < z && p != 5) e[5] = 1;
      if (in_z) e[P-1:6] = f.port_mask;
    end
    return e;
  endfunction

  function automatic flit_t rand_flit(int id);
    flit_t f;
    int a, b;
    f = '0;
    a = $urandom_range(0, 2); b = $urandom_range(0, 2);
    f.x_lo = 3'(a < b ? a : b); f.x_hi = 3'(a < b ? b : a);
    a = $urandom_range(0, 2); b = $urandom_range(0, 2);
    f.y_lo = 3'(a < b ? a : b); f.y_hi = 3'(a < b ? b : a);
    a = $urandom_range(0, 2); b = $urandom_range(0, 2);
    f.z_lo = 2'(a < b ? a : b); f.z_hi = 2'(a < b ? b : a);
    f.port_mask = 5'($urandom_range(1, 31));
    f.data = 16'(id);
    return f;
  endfunction

  initial begin
    for (int i = 0; i < P; i++) begin
      in_valid[i] = 0; in_flit[i] = '0; out_ready[i] = 1;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // ---- part 1
    for (int t = 0; t < 400; t++) begin
      int p;
      flit_t f;
      logic [P-1:0] e, got;
      p = $urandom_range(0, P-1);
      f = rand_flit(t);
      // a flit arriving from a neighbour has come from outside the box's range in that
      // dimension or along it; keep inputs consistent with a real path
      e = expected(p, f);
      for (int o = 0; o < P; o++) seen_id[o].delete();
      @(negedge clk);
      in_valid[p] = 1; in_flit[p] = f;
      @(negedge clk);
      in_valid[p] = 0;
      for (int c = 0; c < 20; c++) begin
        for (int o = 0; o < P; o++) begin
          out_ready[o] = ($urandom_range(0, 3) != 0);
          if (!out_ready[o]) stalls++;
        end
        @(negedge clk);
      end
      for (int o = 0; o < P; o++) out_ready[o] = 1;
      @(negedge clk);
      got = '0;
      for (int o = 0; o < P; o++) begin
        if (seen_id[o].size() > 1) begin failures++; $display("output %0d sent %0d copies", o, seen_id[o].size()); end
        if (seen_id[o].size() == 1) begin
          got[o] = 1;
          if (seen_id[o][0] != 16'(t)) begin failures++; $display("wrong flit on %0d", o); end
        end
      end
      checks++;
      if (got != e) begin
        failures++;
        if (failures < 8) $display("flit %0d in port %0d box x%0d-%0d y%0d-%0d z%0d-%0d: got %b expected %b",
                                   t, p, f.x_lo, f.x_hi, f.y_lo, f.y_hi, f.z_lo, f.z_hi, got, e);
      end
      if ($countones(e) > 1) multicast_seen++;
    end
    // ---- part 2: inputs 0..5 and 6 all send to local port 6 of this router
    for (int o = 0; o < P; o++) seen_id[o].delete();
    @(negedge clk);
    for (int i = 0; i < 7; i++) in_valid[i] = 1;
    for (int n = 0; n < 3; n++) begin
      for (int i = 0; i < 7; i++) begin
        in_flit[i] = '0;
        in_flit[i].x_lo = 1; in_flit[i].x_hi = 1; in_flit[i].y_lo = 1; in_flit[i].y_hi = 1;
        in_flit[i].z_lo = 1; in_flit[i].z_hi = 1; in_flit[i].port_mask = 5'b00001;
        in_flit[i].data = 16'(1000 + 10*i + n);
      end
      @(negedge clk);
    end
    for (int i = 0; i < 7; i++) in_valid[i] = 0;
    repeat (40) @(negedge clk);
    checks++;
    if (seen_id[6].size() != 21) begin failures++; $display("part 2: %0d flits delivered, expected 21", seen_id[6].size()); end
    for (int i = 0; i < 7; i++)
      for (int n = 0; n < 3; n++) begin
        int cnt;
        cnt = 0;
        foreach (seen_id[6][k]) if (seen_id[6][k] == 1000 + 10*i + n) cnt++;
        checks++;
        if (cnt != 1) begin failures++; $display("flit %0d delivered %0d times", 1000 + 10*i + n, cnt); end
      end
    checks++;
    if (multicast_seen == 0 || stalls == 0) failures++;
    $display("multicast flits %0d, stall cycles %0d", multicast_seen, stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
