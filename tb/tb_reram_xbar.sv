// tb_reram_xbar: checks the crossbar model at its full 128 x 128 size.
// Programs every row with random 2-bit levels (kept in a reference copy),
// drives random word-line patterns and compares every bit-line sum with the
// sum worked out from the reference copy.
module tb_reram_xbar;
  localparam int ROWS = 128, COLS = 128;
  logic clk = 0;
  always #5 clk = ~clk;

  logic                wr_en;
  logic [6:0]          wr_row;
  logic [COLS*2-1:0]   wr_data;
  logic [ROWS-1:0]     in_bits;
  logic [6:0]          col_sel;
  logic [8:0]          col_current;
  int unsigned         ref_cell [ROWS][COLS];
  int checks = 0, failures = 0;

  reram_xbar #(.ROWS(ROWS), .COLS(COLS), .CELL_BITS(2)) dut (.*);

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; wr_row = 0; wr_data = '0; in_bits = '0; col_sel = 0;
    for (int r = 0; r < ROWS; r++) begin
      for (int c = 0; c < COLS; c++) begin
        ref_cell[r][c] = $urandom_range(0, 3);
        wr_data[c*2 +: 2] = 2'(ref_cell[r][c]);
      end
      wr_row = 7'(r); wr_en = 1;
      @(posedge clk); #1;
    end
    wr_en = 0;
    for (int t = 0; t < 6; t++) begin
      for (int r = 0; r < ROWS; r++)
        in_bits[r] = (t == 0) ? 1'b1 : (t == 1) ? 1'b0 : 1'($urandom_range(0, 1));
      for (int c = 0; c < COLS; c++) begin
        int unsigned exp_sum;
        exp_sum = 0;
        for (int r = 0; r < ROWS; r++) if (in_bits[r]) exp_sum += ref_cell[r][c];
        col_sel = 7'(c); #1;
        checks++;
        if (col_current != 9'(exp_sum)) begin
          failures++;
          if (failures < 5) $display("col %0d: got %0d expected %0d", c, col_current, exp_sum);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
