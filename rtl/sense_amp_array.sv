// sense_amp_array -- the row of sense amplifiers under a PE's sub-arrays.
//
// One sense amplifier per column reads the bit line shared by all sub-arrays of
// the PE. With one input row and one weight row opened, it resolves the AND of
// the two cells (the sub-array model reports each sub-array's share of the bit
// line, ANDed here). The result is latched on the clock edge when `en` is high
// and held otherwise; reset clears it.
//
// Paper: the AND result is obtained from the sense amplifiers. Own choice: the
// output latch, which is the first pipeline stage of the PE.
module sense_amp_array #(
  parameter int COLS = 9,
  parameter int NSUB = 17
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            en,
  input  logic [COLS-1:0] bl [NSUB],
  output logic [COLS-1:0] q
);
  logic [COLS-1:0] sensed;

  always_comb begin
    sensed = '1;
    for (int s = 0; s < NSUB; s++) sensed = sensed & bl[s];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  q <= '0;
    else if (en) q <= sensed;
  end
endmodule
