// tb_computing_set -- drives the tagged sense-amplifier output for whole
// kernels (all 64 bit pairs of 8-bit operands, in random order of values) and
// checks each result against sum 2^(m+n)*popcount(sa_q), its filter tag, and
// that it appears one edge after the last pair.
module tb_computing_set;
  import pim_pkg::*;
  localparam int K = 9, IB = 8, WB = 8, AW = acc_width(IB, WB, K);
  logic clk = 0, rst_n;
  pe_op_t op_s;
  logic [K-1:0] sa_q;
  logic res_valid;
  logic [OP_FILT_W-1:0] res_filt;
  logic [AW-1:0] res;
  int checks = 0, failures = 0;
  longint exp_sum;

  computing_set #(.KSIZE(K), .IBITS(IB), .WBITS(WB)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #10000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    op_s = PE_OP_IDLE; sa_q = '0;
    rst_n = 0; #12; rst_n = 1;
    for (int kk = 0; kk < 30; kk++) begin
      logic [OP_FILT_W-1:0] f;
      f = OP_FILT_W'($urandom_range(15, 0));
      exp_sum = 0;
      for (int m = 0; m < IB; m++)
        for (int n = 0; n < WB; n++) begin
          @(negedge clk);
          op_s.valid = 1; op_s.first = (m == 0 && n == 0); op_s.last = (m == IB-1 && n == WB-1);
          op_s.filt = f; op_s.ibit = OP_BIT_W'(m); op_s.wbit = OP_BIT_W'(n);
          sa_q = (kk == 0) ? '1 : K'($urandom);
          exp_sum += longint'($countones(sa_q)) << (m + n);
        end
      @(posedge clk); #1;
      op_s = PE_OP_IDLE;
      checks++;
      if (!res_valid || longint'(res) != exp_sum || res_filt != f) begin
        failures++;
        $display("FAIL kernel %0d: valid=%0b res=%0d exp=%0d filt=%0d/%0d", kk, res_valid, res, exp_sum, res_filt, f);
      end
      if (kk % 3 == 0) repeat (2) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
