// tb_pim_controller -- checks the operation stream of every PE lane against a
// reference schedule (unpruned filters in ascending order, then input bit, then
// weight bit, one op per cycle), that pruned kernels cost no cycle, that a
// second start while busy is ignored, and the `done` timing: one cycle pulse
// after edge Kmax*IBITS*WBITS + 1 counted from the start edge. Scenarios: no
// pruning, random pruning with one PE fully pruned, and everything pruned.
module tb_pim_controller;
  import pim_pkg::*;
  localparam int NP = 16, NF = 16, IB = 8, WB = 8;
  logic clk = 0, rst_n, start;
  logic [NF-1:0] pruned [NP];
  pe_op_t op [NP];
  logic busy, done;
  int checks = 0, failures = 0;

  pim_controller #(.NUM_PE(NP), .NFILT(NF), .IBITS(IB), .WBITS(WB)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #50000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic run(string name);
    pe_op_t expq [NP][$];
    int kmax = 0, t = 0, done_at = -1;
    for (int p = 0; p < NP; p++) begin
      int k = 0;
      for (int f = 0; f < NF; f++) if (!pruned[p][f]) begin
        k++;
        for (int m = 0; m < IB; m++)
          for (int n = 0; n < WB; n++) begin
            pe_op_t o;
            o.valid = 1; o.first = (m == 0 && n == 0); o.last = (m == IB-1 && n == WB-1);
            o.filt = OP_FILT_W'(f); o.ibit = OP_BIT_W'(m); o.wbit = OP_BIT_W'(n);
            expq[p].push_back(o);
          end
      end
      if (k > kmax) kmax = k;
    end
    @(negedge clk); start = 1;
    @(posedge clk); #1; start = 0;      // start edge = edge 0
    while (done_at < 0 && t < 100000) begin
      // cycle after edge t: check ops
      for (int p = 0; p < NP; p++) begin
        pe_op_t e = (expq[p].size() > 0) ? expq[p].pop_front() : PE_OP_IDLE;
        checks++;
        if (op[p] !== e && !(e.valid == 0 && op[p].valid == 0)) begin
          failures++;
          if (failures < 10) $display("FAIL %s t=%0d pe %0d op %p exp %p", name, t, p, op[p], e);
        end
      end
      if (t == 5) begin start = 1; end    // ignored: busy
      if (t == 6) start = 0;
      if (done) done_at = t;
      @(posedge clk); #1; t++;
    end
    checks++;
    if (done_at != kmax * IB * WB + 1) begin
      failures++; $display("FAIL %s done after edge %0d, expected %0d", name, done_at, kmax*IB*WB + 1);
    end
    checks++;
    if (busy) begin failures++; $display("FAIL %s busy after done", name); end
    @(posedge clk); #1;
    checks++;
    if (done) begin failures++; $display("FAIL %s done longer than one cycle", name); end
    $display("%s: Kmax=%0d, done after %0d cycles", name, kmax, done_at);
  endtask

  initial begin
    start = 0;
    for (int p = 0; p < NP; p++) pruned[p] = '0;
    rst_n = 0; #12; rst_n = 1;
    run("dense");
    for (int p = 0; p < NP; p++) pruned[p] = NF'($urandom) & NF'($urandom);
    pruned[3] = '1;
    pruned[5] = '0;
    pruned[7] = NF'(16'h7FFF);     // only the last filter kept
    run("pruned");
    for (int p = 0; p < NP; p++) pruned[p] = '1;
    run("all_pruned");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
