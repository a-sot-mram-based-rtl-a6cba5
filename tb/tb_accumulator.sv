// tb_accumulator -- feeds framed sequences of random terms (with idle gaps and
// back-to-back frames) and checks each result, that res_valid pulses exactly
// once per frame one edge after the last term, and that res holds between frames.
module tb_accumulator;
  localparam int W = 20;
  logic clk = 0, rst_n, valid, first, last;
  logic [W-1:0] din, res;
  logic res_valid;
  int checks = 0, failures = 0;
  int unsigned sum;

  accumulator #(.W(W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    valid = 0; first = 0; last = 0; din = '0;
    rst_n = 0; #12; rst_n = 1;
    for (int fr = 0; fr < 40; fr++) begin
      int len;
      len = $urandom_range(64, 1);
      sum = 0;
      for (int k = 0; k < len; k++) begin
        @(negedge clk);
        valid = 1; first = (k == 0); last = (k == len - 1);
        din = W'($urandom_range(9 << 14, 0));
        sum += din;
        if (k > 0) begin
          checks++;
          if (res_valid) begin failures++; $display("FAIL early res_valid"); end
        end
        // gaps inside a frame
        if (k != len - 1 && $urandom_range(3, 0) == 0) begin
          @(negedge clk); valid = 0;
        end
      end
      @(posedge clk); #1;
      valid = 0;
      checks++;
      if (!res_valid || int'(res) != int'(sum[W-1:0])) begin
        failures++;
        $display("FAIL frame %0d res_valid=%0b res=%0d exp=%0d", fr, res_valid, res, sum);
      end
      @(posedge clk); #1;
      checks++;
      if (res_valid || int'(res) != int'(sum[W-1:0])) begin failures++; $display("FAIL hold"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
