// tb_bit_counter -- exhaustive check of the 9-bit population count.
module tb_bit_counter;
  localparam int N = 9;
  logic [N-1:0] bits;
  logic [$clog2(N+1)-1:0] count;
  int checks = 0, failures = 0, e;

  bit_counter #(.N(N)) dut (.*);

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int v = 0; v < 2**N; v++) begin
      bits = N'(v); #1;
      e = 0;
      for (int i = 0; i < N; i++) e += (v >> i) & 1;
      checks++;
      if (int'(count) != e) begin
        failures++;
        $display("FAIL bits=%b count=%0d exp=%0d", bits, count, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
