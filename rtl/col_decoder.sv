// col_decoder -- bit-line (column) decoder of one PE.
//
// Selects which columns of the opened row are written: a single column from
// `addr`, or every column when `all_cols` is set (a whole bit-plane written at
// once). Combinational; all outputs are 0 when `en` is low.
//
// Paper: the PE has a column decoder. Own choice: its use for write column
// selection and the whole-row mode.
module col_decoder #(
  parameter int N_COLS = 9,
  localparam int AW = (N_COLS > 1) ? $clog2(N_COLS) : 1
) (
  input  logic              en,
  input  logic              all_cols,
  input  logic [AW-1:0]     addr,
  output logic [N_COLS-1:0] col_en
);
  always_comb begin
    col_en = '0;
    for (int c = 0; c < N_COLS; c++) begin
      if (en && (all_cols || addr == AW'(c))) col_en[c] = 1'b1;
    end
  end
endmodule
