// tb_adc: checks the ADC model. Random column sums below and above full scale
// are sampled; one clock later the code must equal the sum, or 255 (8-bit
// full scale) where the sum is larger, and code_valid must follow sample.
module tb_adc;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic       sample;
  logic [8:0] analog_in;
  logic [7:0] code;
  logic       code_valid;
  int checks = 0, failures = 0;

  adc #(.IN_W(9), .ADC_BITS(8)) dut (.*);

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    sample = 0; analog_in = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      int unsigned v, e;
      logic s;
      v = (i < 3) ? (i == 0 ? 255 : i == 1 ? 256 : 384) : $urandom_range(0, 384);
      s = (i % 7 != 3);
      e = (v > 255) ? 255 : v;
      @(negedge clk); sample = s; analog_in = 9'(v);
      @(posedge clk); #1;
      checks++;
      if (code_valid !== s || (s && code !== 8'(e))) begin
        failures++;
        if (failures < 5) $display("in %0d: code %0d valid %0d, expected %0d", v, code, code_valid, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
