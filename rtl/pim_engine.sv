// pim_engine -- SOT-MRAM processing-in-memory engine (top level).
//
// NUM_PE processing elements, one per input channel, each holding the inputs of
// its channel under the kernel window and the kernels of NFILT filters for that
// channel; a controller drives all PEs in parallel, and a LUT marks kernels
// removed by kernel-wise pruning so the controller skips them. Filter and
// channel pruning and quantization shrink the engine through NFILT, NUM_PE and
// IBITS/WBITS. Each PE returns, for every kept filter f, the unsigned dot
// product of its KSIZE inputs and filter f's KSIZE weights, computed in memory
// as the sum over bit pairs of 2^(m+n) * bitcount(AND of bit-planes).
//
// Use: write the bit-planes of inputs and weights through the write port
// (wr_pe selects the PE, wr_sub 0 = inputs, f+1 = filter f, wr_row = bit),
// write LUT marks, pulse `start`, and collect res_valid/res_filt/res per PE
// until `done`. Results are per channel; adding channels into output pixels is
// left outside the engine, as the paper does not describe it. Writes to the
// memories and the LUT are only allowed while not busy.
// rst_n also gates the assertions below (disable iff), which lint reports as a
// reset used both asynchronously and synchronously; no logic uses it that way.
module pim_engine
  import pim_pkg::*;
#(
  parameter int KSIZE  = DEF_KSIZE,
  parameter int IBITS  = DEF_IBITS,
  parameter int WBITS  = DEF_WBITS,
  parameter int NFILT  = DEF_NFILT,
  parameter int NUM_PE = DEF_NUM_PE,
  localparam int PW    = (NUM_PE > 1) ? $clog2(NUM_PE) : 1,
  localparam int FW    = (NFILT > 1) ? $clog2(NFILT) : 1,
  localparam int SW    = $clog2(NFILT + 2),
  localparam int BW    = $clog2(((IBITS > WBITS) ? IBITS : WBITS) + 1),
  localparam int CAW   = (KSIZE > 1) ? $clog2(KSIZE) : 1,
  localparam int ACC_W = acc_width(IBITS, WBITS, KSIZE)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // memory write port
  input  logic                 wr_en,
  input  logic [PW-1:0]        wr_pe,
  input  logic [SW-1:0]        wr_sub,
  input  logic [BW-1:0]        wr_row,
  input  logic                 wr_all_cols,
  input  logic [CAW-1:0]       wr_col,
  input  logic [KSIZE-1:0]     wr_data,
  // pruning LUT write port
  input  logic                 lut_wr_en,
  input  logic [PW-1:0]        lut_wr_pe,
  input  logic [FW-1:0]        lut_wr_filt,
  input  logic                 lut_wr_pruned,
  // control
  input  logic                 start,
  output logic                 busy,
  output logic                 done,
  // results, one stream per PE
  output logic                 res_valid [NUM_PE],
  output logic [OP_FILT_W-1:0] res_filt  [NUM_PE],
  output logic [ACC_W-1:0]     res       [NUM_PE]
);
  logic [NFILT-1:0] pruned [NUM_PE];
  pe_op_t           op     [NUM_PE];

  kernel_lut #(.NUM_PE(NUM_PE), .NFILT(NFILT)) u_lut (
    .clk(clk), .rst_n(rst_n),
    .wr_en(lut_wr_en && !busy), .wr_pe(lut_wr_pe), .wr_filt(lut_wr_filt),
    .wr_pruned(lut_wr_pruned), .pruned(pruned)
  );

  pim_controller #(.NUM_PE(NUM_PE), .NFILT(NFILT), .IBITS(IBITS), .WBITS(WBITS)) u_ctrl (
    .clk(clk), .rst_n(rst_n), .start(start), .pruned(pruned),
    .op(op), .busy(busy), .done(done)
  );

  for (genvar p = 0; p < NUM_PE; p++) begin : g_pe
    pim_pe #(.KSIZE(KSIZE), .IBITS(IBITS), .WBITS(WBITS), .NFILT(NFILT)) u_pe (
      .clk(clk), .rst_n(rst_n),
      .wr_en(wr_en && !busy && wr_pe == PW'(p)),
      .wr_sub(wr_sub), .wr_row(wr_row), .wr_all_cols(wr_all_cols),
      .wr_col(wr_col), .wr_data(wr_data),
      .op(op[p]),
      .res_valid(res_valid[p]), .res_filt(res_filt[p]), .res(res[p])
    );
  end

  a_no_write_when_busy: assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> !(wr_en || lut_wr_en));
endmodule
