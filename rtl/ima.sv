// ima: In-situ Multiply-Accumulate unit of a ReRAM tile.
//
// One IMA holds XBARS crossbars of ROWS x COLS 2-bit cells, one ADC per
// crossbar, ROWS 1-bit DACs per crossbar, an input register and a
// shift-and-add unit. It computes y[c] = sum_r W[r][c] * x[r] for all COLS
// columns, with WEIGHT_W = XBARS*CELL_BITS-bit unsigned weights (crossbar k
// holds bits 2k+1:2k of every weight) and IN_BITS-bit unsigned inputs.
//
// Operation: the input vector is applied bit-serially, LSB first. For each
// input bit every crossbar's bit lines are converted one column per clock by
// the crossbar's ADC, so one pass over an input bit takes COLS clocks and the
// whole product IN_BITS*COLS clocks. Read at the ADC rate, a 128-column
// crossbar is then read once every 128 clocks, which matches the paper's
// 10 MHz crossbar rate at a 1.28 GHz clock.
//
// Interface and timing:
//   wr_en/wr_xbar/wr_row/wr_data : program one crossbar row.
//   in_wr_en/in_wr_idx/in_wr_data: write one element of the input register.
//   start (while !busy)          : begin; out_valid rises IN_BITS*COLS + 1
//                                  clocks after the edge that takes start.
//   out_valid/out_ready/out_col/out_data/out_last : the COLS results, one per
//                                  accepted transfer, column 0 first.
// Crossbar geometry, ADC count and resolution, 1-bit DACs and 2-bit cells
// follow the paper. Weight slicing across crossbars, input precision,
// unsigned arithmetic and the result stream are this design's own choices.
// A V-PE column can sum to 384, above the 8-bit ADC full scale of 255: such
// codes clamp, so results are exact only while every column sum fits.
module ima #(
  parameter int unsigned ROWS      = 128,
  parameter int unsigned COLS      = 128,
  parameter int unsigned XBARS     = 8,
  parameter int unsigned CELL_BITS = 2,
  parameter int unsigned ADC_BITS  = 8,
  parameter int unsigned IN_BITS   = 16,
  parameter int unsigned ACC_W     = 40,
  localparam int unsigned CW  = (COLS > 1) ? $clog2(COLS) : 1,
  localparam int unsigned RW  = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned BW  = (IN_BITS > 1) ? $clog2(IN_BITS) : 1,
  localparam int unsigned KW  = (XBARS > 1) ? $clog2(XBARS) : 1,
  localparam int unsigned IW  = $clog2(ROWS * ((1 << CELL_BITS) - 1) + 1)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // crossbar programming
  input  logic                      wr_en,
  input  logic [KW-1:0]             wr_xbar,
  input  logic [RW-1:0]             wr_row,
  input  logic [COLS*CELL_BITS-1:0] wr_data,
  // input register
  input  logic                      in_wr_en,
  input  logic [RW-1:0]             in_wr_idx,
  input  logic [IN_BITS-1:0]        in_wr_data,
  // control
  input  logic                      start,
  output logic                      busy,
  // result stream
  output logic                      out_valid,
  input  logic                      out_ready,
  output logic [CW-1:0]             out_col,
  output logic [ACC_W-1:0]          out_data,
  output logic                      out_last
);

  typedef enum logic [1:0] {S_IDLE, S_COMPUTE, S_DRAIN, S_OUTPUT} state_e;
  state_e state;

  logic [IN_BITS-1:0] in_reg [ROWS];
  logic [BW-1:0]      bit_q;
  logic [CW-1:0]      col_q;
  logic [CW-1:0]      smp_col;
  logic [BW-1:0]      smp_bit;

  // ---- input register (1-bit DAC levels are its bit_q-th bits)
  always_ff @(posedge clk) begin
    if (in_wr_en) in_reg[in_wr_idx] <= in_wr_data;
  end

  logic [ROWS-1:0] dac_bits;
  always_comb
    for (int r = 0; r < ROWS; r++) dac_bits[r] = in_reg[r][bit_q];

  // ---- crossbars and ADCs
  logic                      sample;
  logic [XBARS*ADC_BITS-1:0] codes;
  logic [XBARS-1:0]          code_valid;

  assign sample = (state == S_COMPUTE);

  for (genvar k = 0; k < XBARS; k++) begin : g_xbar
    logic [IW-1:0] current;
    reram_xbar #(.ROWS(ROWS), .COLS(COLS), .CELL_BITS(CELL_BITS)) u_xbar (
      .clk        (clk),
      .wr_en      (wr_en && (wr_xbar == KW'(k))),
      .wr_row     (wr_row),
      .wr_data    (wr_data),
      .in_bits    (dac_bits),
      .col_sel    (col_q),
      .col_current(current)
    );
    adc #(.IN_W(IW), .ADC_BITS(ADC_BITS)) u_adc (
      .clk       (clk),
      .rst_n     (rst_n),
      .sample    (sample),
      .analog_in (current),
      .code      (codes[k*ADC_BITS +: ADC_BITS]),
      .code_valid(code_valid[k])
    );
  end

  // ---- shift-and-add
  shift_add #(
    .COLS(COLS), .XBARS(XBARS), .ADC_BITS(ADC_BITS), .CELL_BITS(CELL_BITS),
    .IN_BITS(IN_BITS), .ACC_W(ACC_W)
  ) u_sa (
    .clk    (clk),
    .clear  (state == S_IDLE && start),
    .add_en (code_valid[0]),
    .add_col(smp_col),
    .add_bit(smp_bit),
    .codes  (codes),
    .rd_col (col_q),
    .rd_data(out_data)
  );

  // ---- sequencer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      bit_q   <= '0;
      col_q   <= '0;
      smp_col <= '0;
      smp_bit <= '0;
    end else begin
      smp_col <= col_q;
      smp_bit <= bit_q;
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_COMPUTE;
          bit_q <= '0;
          col_q <= '0;
        end
        S_COMPUTE: begin
          if (col_q == CW'(COLS - 1)) begin
            col_q <= '0;
            if (bit_q == BW'(IN_BITS - 1)) begin
              bit_q <= '0;
              state <= S_DRAIN;
            end else begin
              bit_q <= bit_q + 1'b1;
            end
          end else begin
            col_q <= col_q + 1'b1;
          end
        end
        S_DRAIN: state <= S_OUTPUT;
        S_OUTPUT: if (out_ready) begin
          if (col_q == CW'(COLS - 1)) begin
            col_q <= '0;
            state <= S_IDLE;
          end else begin
            col_q <= col_q + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy      = (state != S_IDLE);
  assign out_valid = (state == S_OUTPUT);
  assign out_col   = col_q;
  assign out_last  = (state == S_OUTPUT) && (col_q == CW'(COLS - 1));

endmodule
