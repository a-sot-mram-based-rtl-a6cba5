// bit_counter -- population count of the AND result of one sense operation.
//
// Counts the ones among the N columns, i.e. bitcount(c_m(I) AND c_n(W)) of the
// bit-wise convolution. Combinational; a plain sum of the bits, which synthesis
// turns into an adder tree.
module bit_counter #(
  parameter int N = 9,
  localparam int CW = $clog2(N + 1)
) (
  input  logic [N-1:0]  bits,
  output logic [CW-1:0] count
);
  always_comb begin
    count = '0;
    for (int i = 0; i < N; i++) count = count + CW'(bits[i]);
  end
endmodule
