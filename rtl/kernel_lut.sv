// kernel_lut -- look-up table of pruned sub-arrays.
//
// Kernel-wise pruning leaves some (channel, filter) kernels all zero. Instead of
// removing their sub-arrays, one bit per (PE, filter) marks them, and the
// controller skips marked sub-arrays during computation. The host sets or
// clears one mark per cycle; all marks are visible at once on `pruned`. Reset
// clears every mark (nothing pruned).
module kernel_lut
  import pim_pkg::*;
#(
  parameter int NUM_PE = DEF_NUM_PE,
  parameter int NFILT  = DEF_NFILT,
  localparam int PW = (NUM_PE > 1) ? $clog2(NUM_PE) : 1,
  localparam int FW = (NFILT > 1) ? $clog2(NFILT) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wr_en,
  input  logic [PW-1:0]    wr_pe,
  input  logic [FW-1:0]    wr_filt,
  input  logic             wr_pruned,
  output logic [NFILT-1:0] pruned [NUM_PE]
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < NUM_PE; p++) pruned[p] <= '0;
    end else if (wr_en) begin
      pruned[wr_pe][wr_filt] <= wr_pruned;
    end
  end
endmodule
