// tb_sense_amp_array -- drives random bit-line states for every sub-array and
// checks that the latched output is the column-wise AND after an enabled edge,
// holds while disabled, and is cleared by reset.
module tb_sense_amp_array;
  localparam int COLS = 9, NSUB = 17;
  logic clk = 0, rst_n, en;
  logic [COLS-1:0] bl [NSUB];
  logic [COLS-1:0] q, e, held;
  int checks = 0, failures = 0;

  sense_amp_array #(.COLS(COLS), .NSUB(NSUB)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    en = 0;
    for (int s = 0; s < NSUB; s++) bl[s] = '1;
    rst_n = 0; #12; rst_n = 1;
    checks++; if (q !== '0) failures++;
    for (int i = 0; i < 200; i++) begin
      @(negedge clk);
      // mostly all-ones lines with two sub-arrays carrying data, as in compute
      for (int s = 0; s < NSUB; s++) bl[s] = '1;
      bl[0] = COLS'($urandom);
      bl[$urandom_range(NSUB-1, 1)] = COLS'($urandom);
      if (i % 7 == 0) bl[$urandom_range(NSUB-1, 0)] = COLS'($urandom);
      e = '1;
      for (int s = 0; s < NSUB; s++) e &= bl[s];
      en = (i % 5 != 4);
      held = q;
      @(posedge clk); #1;
      checks++;
      if (q !== (en ? e : held)) begin
        failures++;
        $display("FAIL i=%0d en=%0b q=%b exp=%b", i, en, q, en ? e : held);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
