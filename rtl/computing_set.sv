// computing_set -- bit-count, shift and accumulate stage of one PE.
//
// Takes the AND result latched by the sense amplifiers (`sa_q`) together with
// the tag of the operation that produced it (`op_s`, registered beside the
// sense amplifiers). The ones are counted, shifted left by m+n (input bit plus
// weight bit) and added into the accumulator; the accumulator restarts on
// `first` and delivers the kernel result on `last`, tagged with the filter.
// Latency: one clock edge from (op_s, sa_q) to (res_valid, res_filt, res).
// The order bit-counter -> shifter -> accumulator follows the paper; the
// framing by first/last is this design's own.
module computing_set
  import pim_pkg::*;
#(
  parameter int KSIZE = DEF_KSIZE,
  parameter int IBITS = DEF_IBITS,
  parameter int WBITS = DEF_WBITS,
  localparam int CW    = $clog2(KSIZE + 1),
  localparam int ACC_W = acc_width(IBITS, WBITS, KSIZE)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  pe_op_t               op_s,
  input  logic [KSIZE-1:0]     sa_q,
  output logic                 res_valid,
  output logic [OP_FILT_W-1:0] res_filt,
  output logic [ACC_W-1:0]     res
);
  logic [CW-1:0]       count;
  logic [OP_BIT_W:0]   sh;
  logic [ACC_W-1:0]    term;

  bit_counter #(.N(KSIZE)) u_bitcount (.bits(sa_q), .count(count));

  assign sh = {1'b0, op_s.ibit} + {1'b0, op_s.wbit};

  shifter #(.IN_W(CW), .SH_W(OP_BIT_W + 1), .OUT_W(ACC_W)) u_shift (
    .din(count), .sh(sh), .dout(term)
  );

  accumulator #(.W(ACC_W)) u_acc (
    .clk(clk), .rst_n(rst_n),
    .valid(op_s.valid), .first(op_s.first), .last(op_s.last),
    .din(term), .res_valid(res_valid), .res(res)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                         res_filt <= '0;
    else if (op_s.valid && op_s.last)   res_filt <= op_s.filt;
  end
endmodule
