// accumulator -- sums the shifted bit-counts of one kernel.
//
// Each valid cycle adds `din`; `first` starts a new sum (the old one is
// discarded) and `last` marks the final term, after which `res` holds the
// complete kernel result and `res_valid` pulses for one cycle. One cycle of
// latency: a term presented in cycle t is in `res` after the edge ending t.
// W is chosen by the caller so the sum cannot overflow.
module accumulator #(
  parameter int W = 20
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         valid,
  input  logic         first,
  input  logic         last,
  input  logic [W-1:0] din,
  output logic         res_valid,
  output logic [W-1:0] res
);
  logic [W-1:0] acc;
  logic [W-1:0] sum;

  assign sum = (first ? '0 : acc) + din;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      res       <= '0;
      res_valid <= 1'b0;
    end else begin
      res_valid <= valid && last;
      if (valid) begin
        acc <= sum;
        if (last) res <= sum;
      end
    end
  end
endmodule
