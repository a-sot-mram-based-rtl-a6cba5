// tb_lenet5_conv2 -- a whole LeNet-5 second convolution layer on the engine.
//
// Layer geometry (standard LeNet-5): 6 input channels of 14x14, 16 filters of
// 6x5x5, stride 1, giving 16 output maps of 10x10. The engine is built at that
// size: one PE per input channel (NUM_PE=6), one weight sub-array per filter
// (NFILT=16), 25 columns for the 5x5 kernel, 8-bit operands. Kernels are
// pruned at random (about 40%) and marked in the LUT; their weights stay in
// memory but must not contribute. For each of the 100 output positions the
// testbench writes the 5x5 input window of every channel into the input
// sub-arrays, runs the engine, adds the six per-channel results of each
// filter (the cross-channel sum is done outside the engine) and compares the
// output map with a direct convolution of the same data. It also checks the
// run time of every window: Kmax*64 + 1 cycles, Kmax the most kernels kept in
// one channel.
module tb_lenet5_conv2;
  import pim_pkg::*;
  localparam int K = 25, IB = 8, WB = 8, NF = 16, NP = 6;
  localparam int H = 14, KH = 5, OH = H - KH + 1;
  localparam int PW = $clog2(NP), FW = $clog2(NF), SW = $clog2(NF + 2);
  localparam int BW = $clog2(9), CAW = $clog2(K);
  localparam int AW = acc_width(IB, WB, K);

  logic clk = 0, rst_n;
  logic wr_en, wr_all_cols, lut_wr_en, lut_wr_pruned, start, busy, done;
  logic [PW-1:0] wr_pe, lut_wr_pe;
  logic [SW-1:0] wr_sub;
  logic [BW-1:0] wr_row;
  logic [CAW-1:0] wr_col;
  logic [K-1:0] wr_data;
  logic [FW-1:0] lut_wr_filt;
  logic res_valid [NP];
  logic [OP_FILT_W-1:0] res_filt [NP];
  logic [AW-1:0] res [NP];

  pim_engine #(.KSIZE(K), .IBITS(IB), .WBITS(WB), .NFILT(NF), .NUM_PE(NP)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int unsigned x [NP][H][H];
  int unsigned w [NF][NP][KH][KH];
  bit prn [NP][NF];
  longint acc [NF];
  int kmax = 0;

  initial begin
    #100000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) begin
    #1;
    if (rst_n)
      for (int p = 0; p < NP; p++)
        if (res_valid[p]) acc[res_filt[p]] += longint'(res[p]);
  end

  task automatic write_row(int p, int sub, int row, logic [K-1:0] d);
    @(negedge clk);
    wr_en = 1; wr_pe = PW'(p); wr_sub = SW'(sub); wr_row = BW'(row);
    wr_all_cols = 1; wr_col = '0; wr_data = d;
    @(negedge clk); wr_en = 0;
  endtask

  initial begin
    int t;
    wr_en = 0; wr_all_cols = 0; wr_pe = '0; wr_sub = '0; wr_row = '0; wr_col = '0; wr_data = '0;
    lut_wr_en = 0; lut_wr_pe = '0; lut_wr_filt = '0; lut_wr_pruned = 0; start = 0;
    for (int c = 0; c < NP; c++)
      for (int i = 0; i < H; i++)
        for (int j = 0; j < H; j++) x[c][i][j] = $urandom_range(255, 0);
    for (int f = 0; f < NF; f++)
      for (int c = 0; c < NP; c++) begin
        prn[c][f] = ($urandom_range(99, 0) < 40);
        for (int i = 0; i < KH; i++)
          for (int j = 0; j < KH; j++) w[f][c][i][j] = $urandom_range(255, 0);
      end
    for (int c = 0; c < NP; c++) begin
      int k;
      k = 0;
      for (int f = 0; f < NF; f++) k += prn[c][f] ? 0 : 1;
      if (k > kmax) kmax = k;
    end
    rst_n = 0; #12; rst_n = 1;
    // weights: kernel (f, c) in sub-array f+1 of PE c, column = 5*i + j
    for (int c = 0; c < NP; c++)
      for (int f = 0; f < NF; f++)
        for (int b = 0; b < WB; b++) begin
          logic [K-1:0] d;
          for (int i = 0; i < KH; i++)
            for (int j = 0; j < KH; j++) d[KH*i + j] = w[f][c][i][j][b];
          write_row(c, f + 1, b, d);
        end
    for (int c = 0; c < NP; c++)
      for (int f = 0; f < NF; f++) begin
        @(negedge clk);
        lut_wr_en = 1; lut_wr_pe = PW'(c); lut_wr_filt = FW'(f); lut_wr_pruned = prn[c][f];
        @(negedge clk); lut_wr_en = 0;
      end
    for (int oy = 0; oy < OH; oy++)
      for (int ox = 0; ox < OH; ox++) begin
        for (int c = 0; c < NP; c++)
          for (int b = 0; b < IB; b++) begin
            logic [K-1:0] d;
            for (int i = 0; i < KH; i++)
              for (int j = 0; j < KH; j++) d[KH*i + j] = x[c][oy + i][ox + j][b];
            write_row(c, 0, b, d);
          end
        for (int f = 0; f < NF; f++) acc[f] = 0;
        @(negedge clk); start = 1;
        @(posedge clk); #1; start = 0;
        t = 0;
        while (!done && t < 5000) begin @(posedge clk); #1; t++; end
        checks++;
        if (t != kmax * IB * WB + 1) begin
          failures++; $display("FAIL (%0d,%0d): %0d cycles, expected %0d", oy, ox, t, kmax*IB*WB + 1);
        end
        @(negedge clk);
        for (int f = 0; f < NF; f++) begin
          longint y;
          y = 0;
          for (int c = 0; c < NP; c++)
            if (!prn[c][f])
              for (int i = 0; i < KH; i++)
                for (int j = 0; j < KH; j++)
                  y += longint'(x[c][oy + i][ox + j]) * longint'(w[f][c][i][j]);
          checks++;
          if (acc[f] != y) begin
            failures++;
            if (failures < 10) $display("FAIL out[%0d][%0d][%0d] = %0d, expected %0d", f, oy, ox, acc[f], y);
          end
        end
      end
    $display("LeNet-5 conv2: %0d outputs checked, Kmax=%0d, %0d cycles per window", OH*OH*NF, kmax, kmax*IB*WB + 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
