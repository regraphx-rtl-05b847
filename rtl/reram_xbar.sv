// reram_xbar: behavioural model of one ReRAM crossbar (analog array).
//
// Behavioural model: the real part is an analog array of ReRAM cells. Each
// cell stores a CELL_BITS-bit conductance level; the word lines are driven by
// 1-bit DACs, and each bit line sums the currents of the cells whose row is
// driven. This model stores the levels as integers and returns the bit-line
// sum as an integer "current" for the column chosen by col_sel, as a
// sample-and-hold plus column multiplexer in front of a shared ADC would.
//
// Interface:
//   wr_en / wr_row / wr_data : program a whole row (write takes effect on the
//                              next clock edge). wr_data[2c+1:2c] is column c.
//   in_bits[r]               : 1-bit DAC level on row r.
//   col_sel / col_current    : combinational; col_current = sum over rows r of
//                              in_bits[r] * cell[r][col_sel].
// The crossbar size and the 2-bit cell come from the paper (128x128 for the
// vertex PEs, 8x8 for the edge PEs). Row-wise programming and the column-major
// storage are this model's own choices.
module reram_xbar #(
  parameter int unsigned ROWS      = 128,
  parameter int unsigned COLS      = 128,
  parameter int unsigned CELL_BITS = 2,
  localparam int unsigned CW = (COLS > 1) ? $clog2(COLS) : 1,
  localparam int unsigned RW = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned IW = $clog2(ROWS * ((1 << CELL_BITS) - 1) + 1)
) (
  input  logic                      clk,
  input  logic                      wr_en,
  input  logic [RW-1:0]             wr_row,
  input  logic [COLS*CELL_BITS-1:0] wr_data,
  input  logic [ROWS-1:0]           in_bits,
  input  logic [CW-1:0]             col_sel,
  output logic [IW-1:0]             col_current
);

  // column-major: col_mem[c][r*CELL_BITS +: CELL_BITS] is cell (r, c)
  logic [ROWS*CELL_BITS-1:0] col_mem [COLS];

  always_ff @(posedge clk) begin
    if (wr_en) begin
      for (int c = 0; c < COLS; c++)
        col_mem[c][wr_row*CELL_BITS +: CELL_BITS] <= wr_data[c*CELL_BITS +: CELL_BITS];
    end
  end

  logic [ROWS*CELL_BITS-1:0] col_word;
  assign col_word = col_mem[col_sel];

  always_comb begin
    col_current = '0;
    for (int r = 0; r < ROWS; r++)
      if (in_bits[r])
        col_current = col_current + IW'(col_word[r*CELL_BITS +: CELL_BITS]);
  end

endmodule
