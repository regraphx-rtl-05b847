// tb_noc_3d_mesh: checks a 3 x 3 x 3 mesh end to end.
// Part 1: a unicast across the whole mesh, (0,0,0) to (2,2,2), must arrive
// after one clock per hop plus one (7 clocks for 6 hops).
// Part 2: random traffic. Flits with random destination boxes (unicast and
// multicast) and random local-port masks are injected from random local
// ports while the local outputs stall at random. Each (router, local port)
// inside a flit's box and mask must receive that flit exactly once and no
// other port may receive it.
module tb_noc_3d_mesh;
  import regraphx_pkg::*;
  localparam int NX = 3, NY = 3, NZ = 3, NR = NX*NY*NZ, L = NUM_LOCAL;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic  loc_in_valid [NR][L], loc_in_ready [NR][L], loc_out_valid [NR][L], loc_out_ready [NR][L];
  flit_t loc_in_flit [NR][L], loc_out_flit [NR][L];
  int checks = 0, failures = 0, multicasts = 0, stalls = 0;
  int unsigned delivered [int];   // key: id*1024 + r*8 + l
  int unsigned n_deliv = 0, n_expected = 0;
  flit_t sent [int];
  longint cycle = 0;
  longint last_arrival = 0;

  noc_3d_mesh #(.NX(NX), .NY(NY), .NZ(NZ), .FIFO_DEPTH(4)) dut (.*);

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    $display("watchdog: delivered %0d of %0d", n_deliv, n_expected);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit taken [NR][L];   // the flit offered before the last edge was accepted
  always @(posedge clk) begin
    cycle <= cycle + 1;
    for (int r = 0; r < NR; r++)
      for (int l = 0; l < L; l++) taken[r][l] = loc_in_valid[r][l] && loc_in_ready[r][l];
    for (int r = 0; r < NR; r++)
      for (int l = 0; l < L; l++)
        if (rst_n && loc_out_valid[r][l] && loc_out_ready[r][l]) begin
          int id, key, x, y, z;
          flit_t f;
          id = int'(loc_out_flit[r][l].data);
          key = id*1024 + r*8 + l;
          x = r % NX; y = (r / NX) % NY; z = r / (NX*NY);
          last_arrival = cycle;
          n_deliv++;
          if (!sent.exists(id)) begin
            failures++; $display("unknown flit %0d at router %0d port %0d", id, r, l);
          end else begin
            f = sent[id];
            if (!(x >= f.x_lo && x <= f.x_hi && y >= f.y_lo && y <= f.y_hi &&
                  z >= f.z_lo && z <= f.z_hi && f.port_mask[l])) begin
              failures++;
              if (failures < 8) $display("flit %0d wrongly delivered at router %0d port %0d", id, r, l);
            end
          end
          if (delivered.exists(key)) begin failures++; $display("flit %0d duplicated", id); end
          delivered[key] = 1;
        end
  end

  function automatic flit_t rand_flit(int id);
    flit_t f;
    int a, b;
    f = '0;
    a = $urandom_range(0, NX-1); b = ($urandom_range(0, 1) == 0) ? a : $urandom_range(0, NX-1);
    f.x_lo = 3'(a < b ? a : b); f.x_hi = 3'(a < b ? b : a);
    a = $urandom_range(0, NY-1); b = ($urandom_range(0, 1) == 0) ? a : $urandom_range(0, NY-1);
    f.y_lo = 3'(a < b ? a : b); f.y_hi = 3'(a < b ? b : a);
    a = $urandom_range(0, NZ-1); b = ($urandom_range(0, 1) == 0) ? a : $urandom_range(0, NZ-1);
    f.z_lo = 2'(a < b ? a : b); f.z_hi = 2'(a < b ? b : a);
    f.port_mask = 5'($urandom_range(1, 31));
    f.data = 16'(id);
    return f;
  endfunction

  initial begin
    for (int r = 0; r < NR; r++)
      for (int l = 0; l < L; l++) begin
        loc_in_valid[r][l] = 0; loc_in_flit[r][l] = '0; loc_out_ready[r][l] = 1;
      end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // ---- part 1: latency
    begin
      flit_t f;
      longint t0;
      f = '0;
      f.x_lo = 2; f.x_hi = 2; f.y_lo = 2; f.y_hi = 2; f.z_lo = 2; f.z_hi = 2;
      f.port_mask = 5'b00100; f.data = 0;
      sent[0] = f;
      n_expected += 1;
      @(negedge clk);
      loc_in_valid[0][0] = 1; loc_in_flit[0][0] = f;
      t0 = cycle;
      @(negedge clk);
      loc_in_valid[0][0] = 0;
      repeat (20) @(negedge clk);
      checks++;
      if (last_arrival - t0 != 7) begin
        failures++; $display("unicast latency %0d, expected 7", last_arrival - t0);
      end
    end
    // ---- part 2: random traffic
    for (int id = 1; id < 1500; ) begin
      @(negedge clk);
      for (int r = 0; r < NR; r++)
        for (int l = 0; l < L; l++) begin
          loc_out_ready[r][l] = ($urandom_range(0, 4) != 0);
          if (!loc_out_ready[r][l]) stalls++;
        end
      for (int r = 0; r < NR; r++)
        for (int l = 0; l < L; l++) begin
          // a flit offered last cycle and not taken stays offered
          if (loc_in_valid[r][l] && !taken[r][l]) continue;
          loc_in_valid[r][l] = 0;
          if (id < 1500 && $urandom_range(0, 15) == 0) begin
            flit_t f;
            int nb;
            f = rand_flit(id);
            sent[id] = f;
            nb = (f.x_hi - f.x_lo + 1) * (f.y_hi - f.y_lo + 1) * (f.z_hi - f.z_lo + 1) * $countones(f.port_mask);
            n_expected += nb;
            if (nb > 1) multicasts++;
            loc_in_valid[r][l] = 1; loc_in_flit[r][l] = f;
            id++;
          end
        end
    end
    for (int r = 0; r < NR; r++) for (int l = 0; l < L; l++) loc_out_ready[r][l] = 1;
    for (bit pending = 1; pending; ) begin
      @(negedge clk);
      pending = 0;
      for (int r = 0; r < NR; r++)
        for (int l = 0; l < L; l++)
          if (loc_in_valid[r][l]) begin
            if (taken[r][l]) loc_in_valid[r][l] = 0;
            else pending = 1;
          end
    end
    repeat (300) @(negedge clk);
    checks++;
    if (n_deliv != n_expected) begin
      failures++; $display("delivered %0d copies, expected %0d", n_deliv, n_expected);
    end
    checks += n_deliv;
    checks++;
    if (multicasts == 0 || stalls == 0) failures++;
    $display("multicast flits %0d, copies delivered %0d, stall cycles %0d", multicasts, n_deliv, stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
