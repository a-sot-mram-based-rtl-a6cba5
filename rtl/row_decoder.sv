// row_decoder -- word-line decoder of one PE.
//
// A single decoder spans every sub-array of a PE (the input sub-array followed by
// the weight sub-arrays, stacked on shared bit lines). For an in-memory AND two
// rows are opened together, one in the input sub-array and one in a weight
// sub-array, so the decoder has two address ports whose one-hot outputs are ORed.
// A write opens only port A. Purely combinational.
//
// Paper: the PE has a row decoder and two rows are selected per AND.
// Own choice: the two-port form and the row numbering (set by pim_pe).
module row_decoder #(
  parameter int N_ROWS = 136,
  localparam int AW = (N_ROWS > 1) ? $clog2(N_ROWS) : 1
) (
  input  logic              en_a,
  input  logic [AW-1:0]     addr_a,
  input  logic              en_b,
  input  logic [AW-1:0]     addr_b,
  output logic [N_ROWS-1:0] wl
);
  always_comb begin
    wl = '0;
    for (int r = 0; r < N_ROWS; r++) begin
      if ((en_a && addr_a == AW'(r)) || (en_b && addr_b == AW'(r))) wl[r] = 1'b1;
    end
  end
endmodule
