// tb_kernel_lut -- checks reset clears every mark, random set/clear writes land
// on exactly the addressed (PE, filter) bit, and marks hold without writes.
module tb_kernel_lut;
  import pim_pkg::*;
  localparam int NP = 16, NF = 16;
  logic clk = 0, rst_n, wr_en, wr_pruned;
  logic [3:0] wr_pe, wr_filt;
  logic [NF-1:0] pruned [NP];
  logic [NF-1:0] ref_lut [NP];
  int checks = 0, failures = 0;

  kernel_lut #(.NUM_PE(NP), .NFILT(NF)) dut (.*);
  always #5 clk = ~clk;

  task automatic compare();
    for (int p = 0; p < NP; p++) begin
      checks++;
      if (pruned[p] !== ref_lut[p]) begin
        failures++;
        $display("FAIL pe %0d: %b exp %b", p, pruned[p], ref_lut[p]);
      end
    end
  endtask

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    wr_en = 0; wr_pe = 0; wr_filt = 0; wr_pruned = 0;
    for (int p = 0; p < NP; p++) ref_lut[p] = '0;
    rst_n = 0; #12; rst_n = 1;
    compare();
    for (int i = 0; i < 300; i++) begin
      @(negedge clk);
      wr_en = ($urandom_range(3, 0) != 0);
      wr_pe = 4'($urandom); wr_filt = 4'($urandom); wr_pruned = 1'($urandom);
      @(posedge clk); #1;
      if (wr_en) ref_lut[wr_pe][wr_filt] = wr_pruned;
      compare();
    end
    @(negedge clk); wr_en = 0;
    rst_n = 0; #2; rst_n = 1;
    for (int p = 0; p < NP; p++) ref_lut[p] = '0;
    compare();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
