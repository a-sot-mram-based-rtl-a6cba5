// tb_pim_pe -- runs one processing element at the default size (3x3 kernel,
// 8-bit inputs and weights, 16 filters) and one at the size of the worked
// example (2x2 kernel, 3-bit operands, 2 filters), checking every kernel
// result and its two-edge latency (see pe_checker).
module tb_pim_pe;
  logic clk = 0, rst_n = 0;
  logic fin_a, fin_b;
  int ca, fa, cb, fb;
  always #5 clk = ~clk;

  pe_checker #(.K(9), .IB(8), .WB(8), .NF(16), .FIG1(1'b0), .ROUNDS(3)) u_a (
    .clk, .rst_n, .finished(fin_a), .checks(ca), .failures(fa));
  pe_checker #(.K(4), .IB(3), .WB(3), .NF(2), .FIG1(1'b1), .ROUNDS(3)) u_b (
    .clk, .rst_n, .finished(fin_b), .checks(cb), .failures(fb));

  initial begin
    #20000000;
    $display("TB_RESULT checks=%0d failures=%0d", ca + cb, fa + fb + 1); $finish;
  end

  initial begin
    #22 rst_n = 1;
    wait (fin_a && fin_b);
    $display("TB_RESULT checks=%0d failures=%0d", ca + cb, fa + fb);
    $finish;
  end
endmodule
