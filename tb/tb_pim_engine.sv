// tb_pim_engine -- end-to-end test of the engine at its default size
// (16 PEs x 16 filters, 3x3 kernels, 8-bit inputs and weights).
//
// Loads random inputs and weights for every (channel, filter) kernel -- some by
// whole bit-plane rows, one kernel per PE by single-cell writes through the
// column decoder -- marks pruned kernels in the LUT, pulses start and checks
// every result against the integer dot product of the channel's inputs and
// the filter's weights, that no result comes from a pruned kernel, and that
// `done` comes Kmax*64 + 1 edges after start (Kmax = most kernels kept in one
// PE). Three windows are run: dense, randomly pruned (with one PE fully
// pruned and one dense, so PEs finish unevenly), and a new input window over
// the same stored weights, then an even pruning that keeps 4 of 16 kernels in
// every PE and so finishes in a quarter of the cycles. Each mechanism is counted and must occur.
module tb_pim_engine;
  import pim_pkg::*;
  localparam int K = DEF_KSIZE, IB = DEF_IBITS, WB = DEF_WBITS;
  localparam int NF = DEF_NFILT, NP = DEF_NUM_PE;
  localparam int PW = $clog2(NP), FW = $clog2(NF), SW = $clog2(NF + 2);
  localparam int BW = $clog2(((IB > WB) ? IB : WB) + 1), CAW = $clog2(K);
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

  pim_engine dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int unsigned inp [NP][K];
  int unsigned wgt [NP][NF][K];
  bit prn [NP][NF];
  bit got [NP][NF];
  int n_results = 0, n_skipped = 0, n_cell_writes = 0, n_row_writes = 0;
  int n_uneven = 0, n_empty_pe = 0, n_reuse = 0;

  initial begin
    #100000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // result monitor
  always @(posedge clk) begin
    int f;
    longint dot;
    #1;
    if (rst_n)
      for (int p = 0; p < NP; p++)
        if (res_valid[p]) begin
          f = int'(res_filt[p]);
          dot = 0;
          for (int c = 0; c < K; c++) dot += longint'(inp[p][c]) * longint'(wgt[p][f][c]);
          checks++;
          if (f >= NF || prn[p][f] || got[p][f] || longint'(res[p]) != dot) begin
            failures++;
            if (failures < 10) $display("FAIL pe %0d filt %0d res %0d exp %0d pruned %0b dup %0b",
                                        p, f, res[p], dot, prn[p][f], got[p][f]);
          end
          if (f < NF) got[p][f] = 1;
          n_results++;
        end
  end

  task automatic write_row(int p, int sub, int row, logic [K-1:0] d);
    @(negedge clk);
    wr_en = 1; wr_pe = PW'(p); wr_sub = SW'(sub); wr_row = BW'(row);
    wr_all_cols = 1; wr_col = '0; wr_data = d;
    @(negedge clk); wr_en = 0;
    n_row_writes++;
  endtask

  task automatic write_cell(int p, int sub, int row, int col, bit b);
    @(negedge clk);
    wr_en = 1; wr_pe = PW'(p); wr_sub = SW'(sub); wr_row = BW'(row);
    wr_all_cols = 0; wr_col = CAW'(col); wr_data = '0; wr_data[col] = b;
    @(negedge clk); wr_en = 0;
    n_cell_writes++;
  endtask

  function automatic logic [K-1:0] plane(int unsigned v[K], int bitn);
    logic [K-1:0] r;
    for (int c = 0; c < K; c++) r[c] = v[c][bitn];
    return r;
  endfunction

  task automatic load_inputs();
    for (int p = 0; p < NP; p++)
      for (int r = 0; r < IB; r++) write_row(p, 0, r, plane(inp[p], r));
  endtask

  task automatic load_weights();
    for (int p = 0; p < NP; p++)
      for (int f = 0; f < NF; f++) begin
        if (f == p) begin
          // one kernel per PE written cell by cell over stale contents
          for (int r = 0; r < WB; r++) write_row(p, f + 1, r, '1);
          for (int r = 0; r < WB; r++)
            for (int c = 0; c < K; c++) write_cell(p, f + 1, r, c, wgt[p][f][c][r]);
        end else begin
          for (int r = 0; r < WB; r++) write_row(p, f + 1, r, plane(wgt[p][f], r));
        end
      end
  endtask

  task automatic write_lut();
    for (int p = 0; p < NP; p++)
      for (int f = 0; f < NF; f++) begin
        @(negedge clk);
        lut_wr_en = 1; lut_wr_pe = PW'(p); lut_wr_filt = FW'(f); lut_wr_pruned = prn[p][f];
        @(negedge clk); lut_wr_en = 0;
      end
  endtask

  int n_faster = 0;

  task automatic run(string name);
    int kmax = 0, kmin = NF, t = 0, done_at = -1, kept = 0;
    for (int p = 0; p < NP; p++) begin
      int k = 0;
      for (int f = 0; f < NF; f++) begin
        got[p][f] = 0;
        if (!prn[p][f]) k++; else n_skipped++;
      end
      kept += k;
      if (k > kmax) kmax = k;
      if (k < kmin) kmin = k;
      if (k == 0) n_empty_pe++;
    end
    if (kmin != kmax) n_uneven++;
    n_results = 0;
    @(negedge clk); start = 1;
    @(posedge clk); #1; start = 0;
    while (!done && t < 100000) begin
      @(posedge clk); #1; t++;
    end
    done_at = t;
    checks++;
    if (done_at != kmax * IB * WB + 1) begin
      failures++; $display("FAIL %s: done after %0d edges, expected %0d", name, done_at, kmax*IB*WB + 1);
    end
    checks++;
    if (n_results != kept) begin
      failures++; $display("FAIL %s: %0d results, expected %0d", name, n_results, kept);
    end
    if (done_at < NF * IB * WB + 1) n_faster++;
    $display("%s: %0d kernels, Kmax=%0d, %0d cycles", name, kept, kmax, done_at);
  endtask

  initial begin
    wr_en = 0; wr_all_cols = 0; wr_pe = '0; wr_sub = '0; wr_row = '0; wr_col = '0; wr_data = '0;
    lut_wr_en = 0; lut_wr_pe = '0; lut_wr_filt = '0; lut_wr_pruned = 0; start = 0;
    for (int p = 0; p < NP; p++) begin
      for (int c = 0; c < K; c++) inp[p][c] = (p == 0) ? 2**IB - 1 : $urandom_range(2**IB - 1, 0);
      for (int f = 0; f < NF; f++) begin
        prn[p][f] = 0;
        for (int c = 0; c < K; c++) wgt[p][f][c] = (p == 0 && f == 1) ? 2**WB - 1 : $urandom_range(2**WB - 1, 0);
      end
    end
    rst_n = 0; #12; rst_n = 1;
    load_weights();
    load_inputs();
    run("dense");
    // random kernel pruning, one PE fully pruned, one kept dense
    for (int p = 0; p < NP; p++)
      for (int f = 0; f < NF; f++) prn[p][f] = ($urandom_range(99, 0) < 60);
    for (int f = 0; f < NF; f++) begin prn[4][f] = 1; prn[9][f] = 0; end
    write_lut();
    run("pruned");
    // new input window, same weights and pruning
    for (int p = 0; p < NP; p++)
      for (int c = 0; c < K; c++) inp[p][c] = $urandom_range(2**IB - 1, 0);
    load_inputs();
    n_reuse++;
    run("new_window");
    // evenly pruned: four kernels kept per PE, so the run takes a quarter of the cycles
    for (int p = 0; p < NP; p++)
      for (int f = 0; f < NF; f++) prn[p][f] = ((f + p) % 4 != 0);
    write_lut();
    run("even_4_of_16");

    $display("mechanisms: row writes %0d, cell writes %0d, skipped kernels %0d, uneven PE runs %0d, empty PEs %0d, weight reuse %0d, shortened runs %0d",
             n_row_writes, n_cell_writes, n_skipped, n_uneven, n_empty_pe, n_reuse, n_faster);
    checks++; if (n_row_writes == 0)  begin failures++; $display("FAIL no row write"); end
    checks++; if (n_cell_writes == 0) begin failures++; $display("FAIL no cell write"); end
    checks++; if (n_skipped == 0)     begin failures++; $display("FAIL no kernel skipped"); end
    checks++; if (n_uneven == 0)      begin failures++; $display("FAIL PEs never finished unevenly"); end
    checks++; if (n_empty_pe == 0)    begin failures++; $display("FAIL no fully pruned PE"); end
    checks++; if (n_faster == 0)      begin failures++; $display("FAIL pruning never shortened a run"); end
    checks++; if (n_reuse == 0)       begin failures++; $display("FAIL weights never reused"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
