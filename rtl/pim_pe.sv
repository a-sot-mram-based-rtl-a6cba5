// pim_pe -- processing element: one input channel against NFILT filters.
//
// Structure (as in the paper): an input sub-array holding the IBITS bit-planes
// of the KSIZE inputs under the kernel window, NFILT weight sub-arrays each
// holding the WBITS bit-planes of one filter's kernel for this channel, a row
// decoder spanning all of them, a column decoder, one row of sense amplifiers
// and one computing set.
//
// Row numbering of the decoder: rows 0..IBITS-1 are the input sub-array (row =
// bit, LSB first); filter f occupies rows IBITS + f*WBITS + n.
//
// Compute: each cycle with op.valid, input row op.ibit and weight row op.wbit of
// sub-array op.filt are opened together; the sense amplifiers latch their AND at
// the clock edge (stage 1, together with the op tag) and the computing set
// counts, shifts and accumulates at the next edge (stage 2). A kernel takes
// IBITS*WBITS ops; its result appears two edges after its last op.
//
// Write: with wr_en and no op, row wr_row of sub-array wr_sub (0 = inputs,
// f+1 = filter f) takes wr_data in the column wr_col, or in all columns when
// wr_all_cols is set. Writing during compute is not allowed (asserted) and is
// ignored. Write port and timing are this design's own.
// rst_n also gates the assertions below (disable iff), which lint reports as a
// reset used both asynchronously and synchronously; no logic uses it that way.
module pim_pe
  import pim_pkg::*;
#(
  parameter int KSIZE = DEF_KSIZE,
  parameter int IBITS = DEF_IBITS,
  parameter int WBITS = DEF_WBITS,
  parameter int NFILT = DEF_NFILT,
  localparam int NSUB  = NFILT + 1,
  localparam int NROWS = IBITS + NFILT * WBITS,
  localparam int RAW   = (NROWS > 1) ? $clog2(NROWS) : 1,
  localparam int SW    = $clog2(NSUB + 1),
  localparam int BW    = $clog2(((IBITS > WBITS) ? IBITS : WBITS) + 1),
  localparam int CAW   = (KSIZE > 1) ? $clog2(KSIZE) : 1,
  localparam int ACC_W = acc_width(IBITS, WBITS, KSIZE)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // row write port
  input  logic                 wr_en,
  input  logic [SW-1:0]        wr_sub,
  input  logic [BW-1:0]        wr_row,
  input  logic                 wr_all_cols,
  input  logic [CAW-1:0]       wr_col,
  input  logic [KSIZE-1:0]     wr_data,
  // operation from the controller
  input  pe_op_t               op,
  // result of one kernel
  output logic                 res_valid,
  output logic [OP_FILT_W-1:0] res_filt,
  output logic [ACC_W-1:0]     res
);
  initial begin
    assert (NFILT <= 2**OP_FILT_W && IBITS <= 2**OP_BIT_W && WBITS <= 2**OP_BIT_W)
      else $error("pim_pe: parameters exceed the pe_op_t field widths");
  end

  logic             do_wr;
  logic [RAW-1:0]   wr_addr, in_addr, w_addr;
  logic [NROWS-1:0] wl;
  logic [KSIZE-1:0] col_en;
  logic [KSIZE-1:0] bl [NSUB];
  logic [KSIZE-1:0] sa_q;
  pe_op_t           op_s;

  assign do_wr   = wr_en && !op.valid;
  assign wr_addr = (wr_sub == '0) ? RAW'(wr_row)
                                  : RAW'(IBITS + (int'(wr_sub) - 1) * WBITS + int'(wr_row));
  assign in_addr = RAW'(op.ibit);
  assign w_addr  = RAW'(IBITS + int'(op.filt) * WBITS + int'(op.wbit));

  // Port A: write row or input row; port B: weight row.
  row_decoder #(.N_ROWS(NROWS)) u_rowdec (
    .en_a  (do_wr || op.valid),
    .addr_a(op.valid ? in_addr : wr_addr),
    .en_b  (op.valid),
    .addr_b(w_addr),
    .wl    (wl)
  );

  col_decoder #(.N_COLS(KSIZE)) u_coldec (
    .en(do_wr), .all_cols(wr_all_cols), .addr(wr_col), .col_en(col_en)
  );

  sot_subarray #(.ROWS(IBITS), .COLS(KSIZE)) u_inp (
    .clk(clk), .wl(wl[IBITS-1:0]), .we(do_wr), .col_en(col_en),
    .wdata(wr_data), .bl(bl[0])
  );

  for (genvar f = 0; f < NFILT; f++) begin : g_filt
    sot_subarray #(.ROWS(WBITS), .COLS(KSIZE)) u_w (
      .clk(clk), .wl(wl[IBITS + f*WBITS +: WBITS]), .we(do_wr), .col_en(col_en),
      .wdata(wr_data), .bl(bl[f+1])
    );
  end

  sense_amp_array #(.COLS(KSIZE), .NSUB(NSUB)) u_sa (
    .clk(clk), .rst_n(rst_n), .en(op.valid), .bl(bl), .q(sa_q)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) op_s <= PE_OP_IDLE;
    else        op_s <= op;
  end

  computing_set #(.KSIZE(KSIZE), .IBITS(IBITS), .WBITS(WBITS)) u_cs (
    .clk(clk), .rst_n(rst_n), .op_s(op_s), .sa_q(sa_q),
    .res_valid(res_valid), .res_filt(res_filt), .res(res)
  );

  a_no_write_in_compute: assert property (@(posedge clk) disable iff (!rst_n)
    !(wr_en && op.valid));
  a_op_in_range: assert property (@(posedge clk) disable iff (!rst_n)
    op.valid |-> (int'(op.filt) < NFILT && int'(op.ibit) < IBITS && int'(op.wbit) < WBITS));
endmodule
