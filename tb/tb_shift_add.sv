// tb_shift_add: checks the shift-and-add unit. Random ADC codes are added for
// random columns and input bits; a reference accumulator array computes
// sum_k code[k] << (2k + bit) independently, and every column is compared
// after the run and after a clear.
module tb_shift_add;
  localparam int COLS = 128, XB = 8, AB = 8;
  logic clk = 0;
  always #5 clk = ~clk;
  logic              clear, add_en;
  logic [6:0]        add_col, rd_col;
  logic [3:0]        add_bit;
  logic [XB*AB-1:0]  codes;
  logic [39:0]       rd_data;
  longint unsigned   ref_acc [COLS];
  int checks = 0, failures = 0;

  shift_add #(.COLS(COLS), .XBARS(XB), .ADC_BITS(AB), .CELL_BITS(2), .IN_BITS(16), .ACC_W(40)) dut (.*);

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare_all();
    for (int c = 0; c < COLS; c++) begin
      rd_col = 7'(c); #1;
      checks++;
      if (rd_data !== 40'(ref_acc[c])) begin
        failures++;
        if (failures < 5) $display("col %0d: %0d expected %0d", c, rd_data, ref_acc[c]);
      end
    end
  endtask

  initial begin
    add_en = 0; add_col = 0; add_bit = 0; codes = '0; rd_col = 0;
    clear = 1; @(posedge clk); #1; clear = 0;
    for (int c = 0; c < COLS; c++) ref_acc[c] = 0;
    for (int i = 0; i < 4000; i++) begin
      longint unsigned p;
      add_col = 7'($urandom_range(0, COLS-1));
      add_bit = 4'($urandom_range(0, 15));
      p = 0;
      for (int k = 0; k < XB; k++) begin
        codes[k*AB +: AB] = 8'($urandom_range(0, 255));
        p += longint'(codes[k*AB +: AB]) << (2*k);
      end
      add_en = ($urandom_range(0, 3) != 0);
      if (add_en) ref_acc[add_col] += p << add_bit;
      @(posedge clk); #1;
    end
    add_en = 0;
    compare_all();
    clear = 1; @(posedge clk); #1; clear = 0;
    for (int c = 0; c < COLS; c++) ref_acc[c] = 0;
    compare_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
