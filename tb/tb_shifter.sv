// tb_shifter -- checks din * 2^sh for every input and every shift 0..14 (the
// range m+n takes with 8-bit inputs and weights).
module tb_shifter;
  logic [3:0] din;
  logic [4:0] sh;
  logic [19:0] dout;
  int checks = 0, failures = 0;

  shifter #(.IN_W(4), .SH_W(5), .OUT_W(20)) dut (.*);

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int d = 0; d < 10; d++)
      for (int s = 0; s <= 14; s++) begin
        din = 4'(d); sh = 5'(s); #1;
        checks++;
        if (int'(dout) != d * (1 << s)) begin
          failures++;
          $display("FAIL %0d << %0d = %0d", d, s, dout);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
