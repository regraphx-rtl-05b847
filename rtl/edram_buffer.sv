// edram_buffer: the tile's eDRAM staging buffer.
//
// Holds the operands that arrive over the NoC until an IMA takes them. It has
// one write port and one read port, both acting on the clock edge, and a
// combinational read value:
//   wr_en with wr_acc = 0 writes wr_data at wr_addr;
//   wr_en with wr_acc = 1 adds wr_data to the word (saturating at all ones),
//     which lets partial sums from several sending tiles meet in one word;
//   rd_clear zeroes the word at rd_addr after it has been read, so the next
//     set of partial sums starts from zero. A write to the same word in the
//     same cycle wins over the clear, and an accumulate then adds to zero.
// The paper shows an eDRAM in each tile but gives neither its size nor its
// use; the accumulate-on-write and clear-on-read behaviour are this design's.
module edram_buffer #(
  parameter int unsigned DEPTH = 1536,
  parameter int unsigned W     = 16,
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          wr_en,
  input  logic          wr_acc,
  input  logic [AW-1:0] wr_addr,
  input  logic [W-1:0]  wr_data,
  input  logic [AW-1:0] rd_addr,
  input  logic          rd_clear,
  output logic [W-1:0]  rd_data
);

  logic [W-1:0] mem [DEPTH];
  logic [W:0]   sum;

  assign rd_data = mem[rd_addr];
  logic [W-1:0] old;
  // a word cleared in this cycle counts as zero for an accumulate
  assign old     = (rd_clear && rd_addr == wr_addr) ? '0 : mem[wr_addr];
  assign sum     = {1'b0, old} + {1'b0, wr_data};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < DEPTH; i++) mem[i] <= '0;
    end else begin
      if (rd_clear) mem[rd_addr] <= '0;
      if (wr_en)    mem[wr_addr] <= !wr_acc ? wr_data : (sum[W] ? '1 : sum[W-1:0]);
    end
  end

endmodule
