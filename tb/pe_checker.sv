// pe_checker -- drives and checks one pim_pe of the given size (testbench helper).
//
// Writes the input bit-planes with whole-row writes and the weights partly
// with single-cell writes, then issues the IBITS*WBITS operations of each
// filter in a random filter order with idle gaps, as the controller would.
// Every result is checked against the integer dot product of inputs and
// weights, its filter tag, and its timing: it must appear at the second clock
// edge after the kernel's last operation. The input window is rewritten and
// the computation repeated ROUNDS times. With FIG1 set, round 0 uses the
// inputs [1 0 4 3] and filter-0 weights [5 2 3 1] of the worked example,
// whose convolution is 20.
module pe_checker
  import pim_pkg::*;
#(
  parameter int K  = 9,
  parameter int IB = 8,
  parameter int WB = 8,
  parameter int NF = 16,
  parameter bit FIG1 = 1'b0,
  parameter int ROUNDS = 3
) (
  input  logic clk,
  input  logic rst_n,
  output logic finished,
  output int   checks,
  output int   failures
);
  localparam int SW  = $clog2(NF + 2);
  localparam int BW  = $clog2(((IB > WB) ? IB : WB) + 1);
  localparam int CAW = (K > 1) ? $clog2(K) : 1;
  localparam int AW  = acc_width(IB, WB, K);

  logic wr_en, wr_all_cols;
  logic [SW-1:0] wr_sub;
  logic [BW-1:0] wr_row;
  logic [CAW-1:0] wr_col;
  logic [K-1:0] wr_data;
  pe_op_t op;
  logic res_valid;
  logic [OP_FILT_W-1:0] res_filt;
  logic [AW-1:0] res;

  pim_pe #(.KSIZE(K), .IBITS(IB), .WBITS(WB), .NFILT(NF)) dut (
    .clk, .rst_n, .wr_en, .wr_sub, .wr_row, .wr_all_cols, .wr_col, .wr_data,
    .op, .res_valid, .res_filt, .res
  );

  int unsigned inp [K];
  int unsigned wgt [NF][K];
  int cycle = 0;
  typedef struct { int filt; longint val; int at; } exp_t;
  exp_t expq [$];

  always @(posedge clk) cycle <= cycle + 1;

  // result monitor
  always @(posedge clk) begin
    exp_t e;
    #1;
    if (rst_n && res_valid) begin
      checks++;
      if (expq.size() == 0) begin
        failures++; $display("FAIL unexpected result filt=%0d res=%0d", res_filt, res);
      end else begin
        e = expq.pop_front();
        if (int'(res_filt) != e.filt || longint'(res) != e.val || cycle != e.at) begin
          failures++;
          $display("FAIL K=%0d filt %0d/%0d res %0d/%0d cycle %0d/%0d", K, res_filt, e.filt,
                   res, e.val, cycle, e.at);
        end
      end
    end
  end

  task automatic write_row(int sub, int row, int vals[]);
    // vals: the values of the sub-array; writes bit `row` of each into one row
    @(negedge clk);
    wr_en = 1; wr_sub = SW'(sub); wr_row = BW'(row); wr_all_cols = 1; wr_col = '0;
    for (int c = 0; c < K; c++) wr_data[c] = vals[c][row];
    @(negedge clk); wr_en = 0;
  endtask

  task automatic write_cell(int sub, int row, int col, bit b);
    @(negedge clk);
    wr_en = 1; wr_sub = SW'(sub); wr_row = BW'(row); wr_all_cols = 0; wr_col = CAW'(col);
    wr_data = '0; wr_data[col] = b;
    @(negedge clk); wr_en = 0;
  endtask

  task automatic load_inputs();
    int v[] = new[K];
    for (int c = 0; c < K; c++) v[c] = int'(inp[c]);
    for (int r = 0; r < IB; r++) write_row(0, r, v);
  endtask

  task automatic load_weights(int f, bit by_cell);
    int v[] = new[K];
    for (int c = 0; c < K; c++) v[c] = int'(wgt[f][c]);
    if (by_cell) begin
      // first fill the rows with the inverted values, then fix each cell
      int nv[] = new[K];
      for (int c = 0; c < K; c++) nv[c] = ~v[c];
      for (int r = 0; r < WB; r++) write_row(f + 1, r, nv);
      for (int r = 0; r < WB; r++)
        for (int c = 0; c < K; c++) write_cell(f + 1, r, c, v[c][r]);
    end else begin
      for (int r = 0; r < WB; r++) write_row(f + 1, r, v);
    end
  endtask

  task automatic run_filter(int f);
    longint dot = 0;
    for (int c = 0; c < K; c++) dot += longint'(inp[c]) * longint'(wgt[f][c]);
    for (int m = 0; m < IB; m++)
      for (int n = 0; n < WB; n++) begin
        @(negedge clk);
        op.valid = 1; op.first = (m == 0 && n == 0); op.last = (m == IB-1 && n == WB-1);
        op.filt = OP_FILT_W'(f); op.ibit = OP_BIT_W'(m); op.wbit = OP_BIT_W'(n);
      end
    // the last op is in the cycle before the next edge (number cycle+1);
    // its result is visible after edge cycle+2
    expq.push_back('{f, dot, cycle + 2});
    @(negedge clk); op = PE_OP_IDLE;
  endtask

  initial begin
    finished = 0; checks = 0; failures = 0;
    wr_en = 0; wr_sub = '0; wr_row = '0; wr_all_cols = 0; wr_col = '0; wr_data = '0;
    op = PE_OP_IDLE;
    @(posedge rst_n);
    for (int f = 0; f < NF; f++)
      for (int c = 0; c < K; c++) wgt[f][c] = $urandom_range(2**WB - 1, 0);
    if (FIG1) begin
      int fi[4] = '{1, 0, 4, 3};
      int fw[4] = '{5, 2, 3, 1};
      for (int c = 0; c < K; c++) begin inp[c] = fi[c]; wgt[0][c] = fw[c]; end
    end else begin
      for (int c = 0; c < K; c++) wgt[0][c] = 2**WB - 1;   // largest kernel value
    end
    for (int f = 0; f < NF; f++) load_weights(f, f == NF - 1);
    for (int rnd = 0; rnd < ROUNDS; rnd++) begin
      if (!(FIG1 && rnd == 0))
        for (int c = 0; c < K; c++)
          inp[c] = (rnd == 1) ? 2**IB - 1 : $urandom_range(2**IB - 1, 0);
      load_inputs();
      if (FIG1 && rnd == 0) begin
        run_filter(0);
        checks++;
        if (expq[0].val != 20) failures++;  // reference itself: 5+0+12+3
      end
      for (int i = 0; i < NF; i++) begin
        run_filter((i * 7 + rnd) % NF);
        if (i % 4 == 3) repeat (3) @(negedge clk);
      end
      repeat (4) @(negedge clk);
    end
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL %0d results missing", expq.size()); end
    finished = 1;
  end
endmodule
