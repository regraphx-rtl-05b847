// rr_arbiter: round-robin arbiter.
//
// Grants one of N requesters (one-hot gnt) combinationally, searching from the
// requester after the one granted last. The priority pointer moves only when
// `advance` is high, that is when the granted request was actually served, so
// a requester that is granted but stalled keeps its turn. Shared helper of the
// router's output ports and the tile's result port; the round-robin policy is
// this design's own choice (the paper does not describe arbitration).
module rr_arbiter #(
  parameter int unsigned N = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] req,
  input  logic         advance,
  output logic [N-1:0] gnt
);

  localparam int unsigned PW = (N > 1) ? $clog2(N) : 1;
  logic [PW-1:0] last;

  always_comb begin
    gnt = '0;
    for (int i = 1; i <= N; i++) begin
      automatic int unsigned idx = (int'(last) + i) % N;
      if (gnt == '0 && req[idx]) gnt[idx] = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) last <= PW'(N - 1);
    else if (advance && gnt != '0) begin
      for (int i = 0; i < N; i++)
        if (gnt[i]) last <= PW'(i);
    end
  end

endmodule
