// tb_col_decoder -- exhaustive check of the column decoder: every address with
// and without whole-row mode, enabled and disabled.
module tb_col_decoder;
  localparam int N  = 9;
  localparam int AW = $clog2(N);
  logic en, all_cols;
  logic [AW-1:0] addr;
  logic [N-1:0] col_en, exp_en;
  int checks = 0, failures = 0;

  col_decoder #(.N_COLS(N)) dut (.*);

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int e = 0; e < 2; e++)
      for (int a = 0; a < 2; a++)
        for (int c = 0; c < N; c++) begin
          en = e[0]; all_cols = a[0]; addr = AW'(c);
          #1;
          exp_en = !en ? '0 : (all_cols ? '1 : (N'(1) << c));
          checks++;
          if (col_en !== exp_en) begin
            failures++;
            $display("FAIL en=%0b all=%0b addr=%0d got %b", en, all_cols, c, col_en);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
