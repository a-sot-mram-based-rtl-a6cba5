// tb_sot_subarray -- writes whole rows and single cells into one sub-array,
// mirrors them in a reference array, then checks the bit lines for every single
// open row (plain read), every pair of rows (in-memory AND), no open row (all
// ones), and that a write with no open row changes nothing.
module tb_sot_subarray;
  localparam int ROWS = 8, COLS = 9;
  logic clk = 0;
  logic [ROWS-1:0] wl;
  logic we;
  logic [COLS-1:0] col_en, wdata, bl;
  logic [COLS-1:0] ref_mem [ROWS];
  int checks = 0, failures = 0;

  sot_subarray #(.ROWS(ROWS), .COLS(COLS)) dut (.*);
  always #5 clk = ~clk;

  task automatic write(int row, logic [COLS-1:0] en, logic [COLS-1:0] d);
    @(negedge clk);
    wl = ROWS'(1) << row; we = 1; col_en = en; wdata = d;
    @(negedge clk);
    we = 0; wl = '0;
    for (int c = 0; c < COLS; c++) if (en[c]) ref_mem[row][c] = d[c];
  endtask

  task automatic check_read(logic [ROWS-1:0] w);
    logic [COLS-1:0] e;
    wl = w; #1;
    e = '1;
    for (int r = 0; r < ROWS; r++) if (w[r]) e &= ref_mem[r];
    checks++;
    if (bl !== e) begin
      failures++;
      $display("FAIL wl=%b bl=%b exp=%b", w, bl, e);
    end
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    we = 0; wl = '0; col_en = '0; wdata = '0;
    for (int r = 0; r < ROWS; r++) write(r, '1, COLS'($urandom));
    for (int i = 0; i < 30; i++)
      write($urandom_range(ROWS-1, 0), COLS'(1) << $urandom_range(COLS-1, 0), COLS'($urandom));
    // a write with no open row must not change anything
    @(negedge clk); wl = '0; we = 1; col_en = '1; wdata = '0;
    @(negedge clk); we = 0;
    @(negedge clk);
    check_read('0);
    for (int r = 0; r < ROWS; r++) check_read(ROWS'(1) << r);
    for (int a = 0; a < ROWS; a++)
      for (int b = a + 1; b < ROWS; b++) check_read((ROWS'(1) << a) | (ROWS'(1) << b));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
