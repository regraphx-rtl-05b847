// tb_edram_buffer: checks write, accumulate (with saturation at 0xFFFF),
// clear-on-read and the write-over-clear priority of the tile buffer against
// a reference array.
module tb_edram_buffer;
  localparam int DEPTH = 1536;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic        wr_en, wr_acc, rd_clear;
  logic [10:0] wr_addr, rd_addr;
  logic [15:0] wr_data, rd_data;
  int unsigned ref_mem [DEPTH];
  int checks = 0, failures = 0, sat_seen = 0;

  edram_buffer #(.DEPTH(DEPTH), .W(16)) dut (.*);

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; wr_acc = 0; rd_clear = 0; wr_addr = 0; rd_addr = 0; wr_data = 0;
    for (int i = 0; i < DEPTH; i++) ref_mem[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 20000; i++) begin
      @(negedge clk);
      wr_en    = ($urandom_range(0, 1) == 1);
      wr_acc   = ($urandom_range(0, 1) == 1);
      wr_addr  = 11'($urandom_range(0, 63));
      wr_data  = 16'($urandom_range(0, 65535));
      rd_addr  = 11'($urandom_range(0, 63));
      rd_clear = ($urandom_range(0, 7) == 0);
      #1;
      checks++;
      if (rd_data !== 16'(ref_mem[rd_addr])) begin
        failures++;
        if (failures < 5) $display("addr %0d: %0h expected %0h", rd_addr, rd_data, ref_mem[rd_addr]);
      end
      if (rd_clear) ref_mem[rd_addr] = 0;
      if (wr_en) begin
        int unsigned s;
        s = wr_acc ? ref_mem[wr_addr] + wr_data : wr_data;
        if (s > 65535) begin s = 65535; sat_seen++; end
        ref_mem[wr_addr] = s;
      end
    end
    checks++;
    if (sat_seen == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
