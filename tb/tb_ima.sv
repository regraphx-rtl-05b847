// tb_ima: checks one IMA at the vertex-PE size (8 crossbars of 128 x 128,
// 8-bit ADCs, 16-bit inputs and weights).
// Random 16-bit weights are programmed through the crossbar write port and a
// random input vector is loaded. The reference result of column c is worked
// out from the weights and inputs alone: for every input bit b and weight
// slice k the bit-line sum s = sum_r x_r[b] * w_rc[2k+1:2k] is clamped at the
// ADC full scale 255 and added as s << (2k + b). Where no sum clamps this is
// exactly sum_r w_rc * x_r, which is checked too. The latency from start to
// the first result (IN_BITS*COLS + 1 clocks) and the stall behaviour under a
// random out_ready are checked. A second run uses all-ones data to force
// clamping.
module tb_ima;
  localparam int ROWS = 128, COLS = 128, XB = 8, IN_BITS = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic               wr_en, in_wr_en, start, busy, out_valid, out_ready, out_last;
  logic [2:0]         wr_xbar;
  logic [6:0]         wr_row, in_wr_idx, out_col;
  logic [COLS*2-1:0]  wr_data;
  logic [15:0]        in_wr_data;
  logic [39:0]        out_data;

  int unsigned     w [ROWS][COLS];
  int unsigned     x [ROWS];
  longint unsigned exp_y [COLS];
  bit              clamped [COLS];
  int checks = 0, failures = 0, clamp_runs = 0;

  ima #(.ROWS(ROWS), .COLS(COLS), .XBARS(XB), .CELL_BITS(2), .ADC_BITS(8),
        .IN_BITS(IN_BITS), .ACC_W(40)) dut (.*);

  initial begin : watchdog
    repeat (60000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 8) $display("FAIL: %s", msg);
    end
  endtask

  task automatic run(input int mode);
    // mode 0: random data, mode 1: all ones (forces clamping)
    int cyc;
    for (int r = 0; r < ROWS; r++) begin
      x[r] = (mode == 1) ? 16'hffff : $urandom_range(0, 65535);
      for (int c = 0; c < COLS; c++) w[r][c] = (mode == 1) ? 16'hffff : $urandom_range(0, 65535);
    end
    // program crossbars: crossbar k, row r holds slice k of each weight
    for (int k = 0; k < XB; k++)
      for (int r = 0; r < ROWS; r++) begin
        @(negedge clk);
        wr_en = 1; wr_xbar = 3'(k); wr_row = 7'(r);
        for (int c = 0; c < COLS; c++) wr_data[c*2 +: 2] = 2'(w[r][c] >> (2*k));
      end
    @(negedge clk); wr_en = 0;
    for (int r = 0; r < ROWS; r++) begin
      in_wr_en = 1; in_wr_idx = 7'(r); in_wr_data = 16'(x[r]);
      @(negedge clk);
    end
    in_wr_en = 0;
    // reference
    for (int c = 0; c < COLS; c++) begin
      exp_y[c] = 0; clamped[c] = 0;
      for (int b = 0; b < IN_BITS; b++)
        for (int k = 0; k < XB; k++) begin
          int unsigned s;
          s = 0;
          for (int r = 0; r < ROWS; r++)
            if (x[r][b]) s += (w[r][c] >> (2*k)) & 3;
          if (s > 255) begin s = 255; clamped[c] = 1; end
          exp_y[c] += longint'(s) << (2*k + b);
        end
    end
    start = 1; @(posedge clk); #1; start = 0;
    cyc = 0;
    while (!out_valid) begin @(posedge clk); #1; cyc++; end
    check(cyc == IN_BITS*COLS + 1, $sformatf("latency %0d, expected %0d", cyc, IN_BITS*COLS + 1));
    check(busy, "busy while results pending");
    for (int c = 0; c < COLS; ) begin
      @(negedge clk);
      out_ready = ($urandom_range(0, 2) != 0);
      #1;
      if (out_valid && out_ready) begin
        check(out_col == 7'(c), $sformatf("column order %0d vs %0d", out_col, c));
        check(out_data == 40'(exp_y[c]), $sformatf("col %0d: %0d expected %0d", c, out_data, exp_y[c]));
        check(out_last == (c == COLS - 1), "out_last");
        if (!clamped[c]) begin
          longint unsigned exact;
          exact = 0;
          for (int r = 0; r < ROWS; r++) exact += longint'(w[r][c]) * longint'(x[r]);
          check(out_data == 40'(exact), $sformatf("col %0d exact product", c));
        end else clamp_runs++;
        c++;
      end
    end
    @(negedge clk); out_ready = 0;
    @(posedge clk); #1;
    check(!busy && !out_valid, "idle after the last result");
  endtask

  initial begin
    wr_en = 0; in_wr_en = 0; start = 0; out_ready = 0;
    wr_xbar = 0; wr_row = 0; wr_data = '0; in_wr_idx = 0; in_wr_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(0);
    run(1);
    check(clamp_runs > 0, "ADC clamping exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
