// tb_reram_tile: checks one E-PE tile (8 x 8 crossbars, 6-bit ADCs, 12 IMAs).
// IMA 0 gathers its input as partial sums (two CMD_ACC flits per element) and
// waits for two START tokens; IMA 1 takes plain CMD_WRITE inputs at index
// window 8..15 and one token. Flits outside an IMA's window, or for an IMA
// that accepts nothing, must be dropped. The reference results are computed
// from the weights and inputs: y[c] = sum_r w[r][c] * x[r], then >> shift and
// saturated to 16 bits. Output flits (random out_ready stalls) must carry the
// configured route, command, index idx_base + c and value, and IMA 0's
// results must be followed by a START token.
module tb_reram_tile;
  import regraphx_pkg::*;
  localparam int N = 8, IMAS = 12;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic            cfg_valid, in_valid, in_ready, out_valid, out_ready;
  cfg_cmd_t        cfg_cmd;
  logic [CFG_W-1:0] cfg_data;
  flit_t           in_flit, out_flit;
  logic [IMAS-1:0] ima_busy;

  int unsigned w [2][N][N];
  int unsigned x [2][N];
  int unsigned exp_out [2][N];
  int got [2];
  int starts_out = 0, checks = 0, failures = 0, stalls = 0;
  bit start_after_all = 0;

  reram_tile #(.ROWS(N), .COLS(N), .ADC_BITS(6), .IMAS(IMAS)) dut (.*);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 8) $display("FAIL: %s", msg); end
  endtask

  task automatic send(input cmd_e cmd, input int ima, input int index, input int data);
    @(negedge clk);
    in_valid = 1; in_flit = '0;
    in_flit.cmd = cmd; in_flit.ima = 4'(ima); in_flit.index = 7'(index); in_flit.data = 16'(data);
    @(negedge clk);
    in_valid = 0;
  endtask

  task automatic cfg_ima(input int i, input ima_cfg_t c);
    @(negedge clk);
    cfg_valid = 1; cfg_cmd = '0; cfg_cmd.kind = CFG_OUT; cfg_cmd.ima = 4'(i);
    cfg_data = '0; cfg_data[$bits(ima_cfg_t)-1:0] = c;
    @(negedge clk); cfg_valid = 0;
  endtask

  // output monitor
  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      int i;
      i = (out_flit.ima == 4'd5) ? 0 : (out_flit.ima == 4'd6) ? 1 : -1;
      if (out_flit.cmd == CMD_START) begin
        starts_out++;
        check(i == 0 && got[0] == N, "START token after IMA 0's last result");
      end else if (i < 0) begin
        check(0, "flit with unknown destination IMA");
      end else begin
        int c;
        c = int'(out_flit.index) - (i == 0 ? 16 : 40);
        check(c >= 0 && c < N, $sformatf("IMA %0d result index %0d", i, out_flit.index));
        if (c >= 0 && c < N) begin
          check(out_flit.data == 16'(exp_out[i][c]), $sformatf("IMA %0d col %0d: %0d expected %0d", i, c, out_flit.data, exp_out[i][c]));
          check(out_flit.cmd == (i == 0 ? CMD_WRITE : CMD_ACC), "result command");
          check(out_flit.x_lo == 3'(i) && out_flit.x_hi == 3'(i+2) && out_flit.z_hi == 2'd2 &&
                out_flit.port_mask == 5'(i == 0 ? 5'b00011 : 5'b10000), "result route");
        end
        got[i]++;
      end
    end
  end

  initial begin
    ima_cfg_t c;
    int unsigned a [N], b [N];
    cfg_valid = 0; cfg_cmd = '0; cfg_data = '0; in_valid = 0; in_flit = '0; out_ready = 1;
    got[0] = 0; got[1] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // weights
    for (int i = 0; i < 2; i++)
      for (int r = 0; r < N; r++)
        for (int cc = 0; cc < N; cc++) w[i][r][cc] = $urandom_range(0, 65535);
    for (int i = 0; i < 2; i++)
      for (int k = 0; k < 8; k++)
        for (int r = 0; r < N; r++) begin
          @(negedge clk);
          cfg_valid = 1; cfg_cmd = '0; cfg_cmd.kind = CFG_XBAR_ROW; cfg_cmd.ima = 4'(i);
          cfg_cmd.xbar = 3'(k); cfg_cmd.row = 7'(r); cfg_data = '0;
          for (int cc = 0; cc < N; cc++) cfg_data[cc*2 +: 2] = 2'(w[i][r][cc] >> (2*k));
        end
    @(negedge clk); cfg_valid = 0;
    // IMA 0: partial sums, two tokens, plain results, START after
    c = '0; c.in_en = 1; c.in_base = 0; c.enable = 1; c.use_acc = 0; c.send_start = 1;
    c.starts_needed = 2; c.shift = 6'd10; c.x_lo = 0; c.x_hi = 2; c.z_lo = 0; c.z_hi = 2;
    c.port_mask = 5'b00011; c.dst_ima = 5; c.idx_base = 16;
    cfg_ima(0, c);
    // IMA 1: window 8..15, one token, partial-sum results
    c = '0; c.in_en = 1; c.in_base = 8; c.enable = 1; c.use_acc = 1; c.send_start = 0;
    c.starts_needed = 1; c.shift = 6'd0; c.x_lo = 1; c.x_hi = 3; c.z_lo = 1; c.z_hi = 2;
    c.port_mask = 5'b10000; c.dst_ima = 6; c.idx_base = 40;
    cfg_ima(1, c);
    // inputs
    for (int r = 0; r < N; r++) begin
      a[r] = $urandom_range(0, 40000); b[r] = $urandom_range(0, 40000);
      x[0][r] = (a[r] + b[r] > 65535) ? 65535 : a[r] + b[r];
      x[1][r] = $urandom_range(0, 65535);
    end
    for (int r = 0; r < N; r++) send(CMD_ACC, 0, r, a[r]);
    send(CMD_WRITE, 0, 9, 12345);    // outside IMA 0's window: dropped
    send(CMD_WRITE, 2, 0, 999);      // IMA 2 accepts nothing: dropped
    send(CMD_START, 2, 0, 0);        // dropped
    send(CMD_START, 0, 0, 0);
    for (int r = 0; r < N; r++) send(CMD_ACC, 0, r, b[r]);
    repeat (20) @(negedge clk);
    check(ima_busy == '0, "no IMA starts on one of two tokens");
    for (int r = 0; r < N; r++) send(CMD_WRITE, 1, 8 + r, x[1][r]);
    send(CMD_WRITE, 1, 3, 7777);     // outside IMA 1's window: dropped
    // reference
    for (int i = 0; i < 2; i++)
      for (int cc = 0; cc < N; cc++) begin
        longint unsigned y;
        y = 0;
        for (int r = 0; r < N; r++) y += longint'(w[i][r][cc]) * x[i][r];
        y = y >> (i == 0 ? 10 : 0);
        exp_out[i][cc] = (y > 65535) ? 65535 : int'(y);
      end
    send(CMD_START, 1, 0, 0);
    send(CMD_START, 0, 0, 0);
    // wait with random stalls on the output
    for (int t = 0; t < 2000 && !(got[0] == N && got[1] == N && starts_out == 1); t++) begin
      @(negedge clk);
      out_ready = ($urandom_range(0, 2) != 0);
      if (!out_ready) stalls++;
      if (ima_busy[0] && ima_busy[1]) start_after_all = 1;
    end
    out_ready = 1;
    repeat (10) @(negedge clk);
    check(got[0] == N && got[1] == N, $sformatf("results %0d/%0d", got[0], got[1]));
    check(starts_out == 1, $sformatf("%0d START tokens out", starts_out));
    check(start_after_all, "both IMAs worked at the same time");
    check(ima_busy == '0, "idle at the end");
    check(stalls > 0, "output stalls exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
