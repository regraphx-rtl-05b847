// adc: behavioural model of the bit-line analog-to-digital converter.
//
// Behavioural model: the real part is a mixed-signal converter. It samples the
// integer "current" of the selected crossbar column when sample is high and,
// one clock later, presents it as an ADC_BITS-bit code, clamped to the full
// scale 2^ADC_BITS - 1. The resolutions (8 bits for the vertex PEs, 6 bits for
// the edge PEs) follow the paper; the clamp at full scale and the one-cycle
// conversion latency are this model's own choices.
module adc #(
  parameter int unsigned IN_W     = 9,
  parameter int unsigned ADC_BITS = 8
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                sample,
  input  logic [IN_W-1:0]     analog_in,
  output logic [ADC_BITS-1:0] code,
  output logic                code_valid
);

  localparam logic [ADC_BITS-1:0] FULL = '1;

  logic [ADC_BITS-1:0] quant;
  always_comb begin
    if (IN_W > ADC_BITS && (analog_in >> ADC_BITS) != '0) quant = FULL;
    else                                                   quant = ADC_BITS'(analog_in);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      code       <= '0;
      code_valid <= 1'b0;
    end else begin
      code_valid <= sample;
      if (sample) code <= quant;
    end
  end

endmodule
