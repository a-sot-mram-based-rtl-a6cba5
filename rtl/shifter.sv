// shifter -- weights a bit-count by 2^(m+n).
//
// Left-shifts the bit-count of bit pair (m, n) by m+n so the accumulator can add
// it directly. Combinational; the output is wide enough for the largest shift.
module shifter #(
  parameter int IN_W  = 4,
  parameter int SH_W  = 5,
  parameter int OUT_W = 20
) (
  input  logic [IN_W-1:0]  din,
  input  logic [SH_W-1:0]  sh,
  output logic [OUT_W-1:0] dout
);
  assign dout = OUT_W'(din) << sh;
endmodule
