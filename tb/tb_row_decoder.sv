// tb_row_decoder -- checks the dual-port word-line decoder against a reference:
// every single-row address, random pairs (including equal addresses) and the
// disabled cases. Combinational, so values are checked after a settle delay.
module tb_row_decoder;
  localparam int N  = 136;
  localparam int AW = $clog2(N);
  logic en_a, en_b;
  logic [AW-1:0] addr_a, addr_b;
  logic [N-1:0] wl, exp_wl;
  int checks = 0, failures = 0;

  row_decoder #(.N_ROWS(N)) dut (.*);

  task automatic check();
    #1;
    exp_wl = '0;
    if (en_a) exp_wl[addr_a] = 1'b1;
    if (en_b) exp_wl[addr_b] = 1'b1;
    checks++;
    if (wl !== exp_wl) begin
      failures++;
      $display("FAIL en_a=%0b a=%0d en_b=%0b b=%0d wl=%h", en_a, addr_a, en_b, addr_b, wl);
    end
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    en_a = 0; en_b = 0; addr_a = '0; addr_b = '0;
    check();
    for (int r = 0; r < N; r++) begin
      en_a = 1; en_b = 0; addr_a = AW'(r); check();
      en_a = 0; en_b = 1; addr_b = AW'(r); check();
    end
    for (int i = 0; i < 500; i++) begin
      en_a = 1; en_b = 1;
      addr_a = AW'($urandom_range(N-1, 0));
      addr_b = (i % 10 == 0) ? addr_a : AW'($urandom_range(N-1, 0));
      check();
      if ($countones(wl) != ((addr_a == addr_b) ? 1 : 2)) failures++;
      checks++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
