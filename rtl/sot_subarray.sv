// sot_subarray -- one SOT-MRAM sub-array, ROWS x COLS cells.
//
// A sub-array holds one kernel: each column is one kernel element and each row
// one bit-plane (row 0 = LSB). The input sub-array of a PE holds the inputs under
// the kernel window; each weight sub-array holds one filter's kernel for the
// PE's channel.
//
// Read: the word lines `wl` open rows; bit line c reads 1 only if every opened
// cell of column c stores 1 (and 1 when no row is opened). Chaining the bit
// lines of the input and a weight sub-array through the sense amplifier thus
// gives the AND of the two opened rows, which is how the array computes AND in
// place. This is a digital model of that sensing. Combinational read.
// Write: on a clock edge with `we`, every opened row takes `wdata` in the
// columns enabled by `col_en`. One-cycle write (the real cell is slower; no
// figure is given). No reset: the cells are non-volatile.
module sot_subarray #(
  parameter int ROWS = 8,
  parameter int COLS = 9
) (
  input  logic            clk,
  input  logic [ROWS-1:0] wl,
  input  logic            we,
  input  logic [COLS-1:0] col_en,
  input  logic [COLS-1:0] wdata,
  output logic [COLS-1:0] bl
);
  logic [COLS-1:0] mtj [ROWS];

  always_ff @(posedge clk) begin
    if (we) begin
      for (int r = 0; r < ROWS; r++) begin
        if (wl[r]) begin
          for (int c = 0; c < COLS; c++) begin
            if (col_en[c]) mtj[r][c] <= wdata[c];
          end
        end
      end
    end
  end

  always_comb begin
    bl = '1;
    for (int r = 0; r < ROWS; r++) begin
      if (wl[r]) bl = bl & mtj[r];
    end
  end
endmodule
