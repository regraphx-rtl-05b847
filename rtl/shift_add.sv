// shift_add: shift-and-add unit of an IMA's peripheral circuits.
//
// A 16-bit weight is split into XBARS 2-bit slices, slice k living in crossbar
// k, and the input vector is applied one bit per step (1-bit DACs). For one
// column c and input bit b the ADCs deliver one code per crossbar; this unit
// forms   partial = sum_k code[k] << (CELL_BITS*k)   and adds partial << b to
// the accumulator of column c. After all IN_BITS input bits the accumulator
// of column c holds sum_r w[r][c] * x[r] (exact while no ADC code saturates).
//
// Interface: clear zeroes all accumulators on the next edge; add_en with
// add_col / add_bit / codes performs one accumulation on the next edge;
// rd_col / rd_data reads an accumulator combinationally.
// The paper only names "peripheral circuits"; the slicing scheme and the
// accumulator width are this design's own choices.
module shift_add #(
  parameter int unsigned COLS      = 128,
  parameter int unsigned XBARS     = 8,
  parameter int unsigned ADC_BITS  = 8,
  parameter int unsigned CELL_BITS = 2,
  parameter int unsigned IN_BITS   = 16,
  parameter int unsigned ACC_W     = 40,
  localparam int unsigned CW = (COLS > 1) ? $clog2(COLS) : 1,
  localparam int unsigned BW = (IN_BITS > 1) ? $clog2(IN_BITS) : 1
) (
  input  logic                      clk,
  input  logic                      clear,
  input  logic                      add_en,
  input  logic [CW-1:0]             add_col,
  input  logic [BW-1:0]             add_bit,
  input  logic [XBARS*ADC_BITS-1:0] codes,
  input  logic [CW-1:0]             rd_col,
  output logic [ACC_W-1:0]          rd_data
);

  logic [ACC_W-1:0] acc [COLS];
  logic [ACC_W-1:0] partial;

  always_comb begin
    partial = '0;
    for (int k = 0; k < XBARS; k++)
      partial = partial + (ACC_W'(codes[k*ADC_BITS +: ADC_BITS]) << (CELL_BITS * k));
  end

  always_ff @(posedge clk) begin
    if (clear) begin
      for (int c = 0; c < COLS; c++) acc[c] <= '0;
    end else if (add_en) begin
      acc[add_col] <= acc[add_col] + (partial << add_bit);
    end
  end

  assign rd_data = acc[rd_col];

endmodule
