// pim_pkg -- constants and types shared by the SOT-MRAM processing-in-memory engine.
//
// The engine computes a convolution kernel as a sum of bit-plane products:
//   I*W = sum_m sum_n 2^(m+n) * bitcount( c_m(I) AND c_n(W) )
// where c_m(I) is bit m of every input under the kernel and c_n(W) is bit n of
// every weight. The 8-bit default precision follows the evaluated configuration;
// the kernel size (3x3) and the PE / filter counts are this design's defaults.
//
// pe_op_t is the operation the controller issues to one PE per cycle: activate
// input row `ibit` and row `wbit` of weight sub-array `filt`, and tag the sensed
// AND result with `first` / `last` so the accumulator can frame one kernel.
// The field widths are fixed here (up to 256 filters and 16-bit operands); the
// modules check their parameters against them.
package pim_pkg;

  localparam int DEF_IBITS  = 8;   // input bit-length (rows of the input sub-array)
  localparam int DEF_WBITS  = 8;   // weight bit-length (rows of a weight sub-array)
  localparam int DEF_KSIZE  = 9;   // kernel elements = columns of a sub-array (3x3)
  localparam int DEF_NFILT  = 16;  // weight sub-arrays (filters) per PE
  localparam int DEF_NUM_PE = 16;  // PEs = input channels held at once

  localparam int OP_FILT_W = 8;    // width of the filter index in pe_op_t
  localparam int OP_BIT_W  = 4;    // width of a bit index in pe_op_t

  typedef struct packed {
    logic                 valid;   // an AND is performed this cycle
    logic                 first;   // first (m,n) pair of this kernel: restart the sum
    logic                 last;    // last (m,n) pair of this kernel: result is complete
    logic [OP_FILT_W-1:0] filt;    // weight sub-array (filter) index
    logic [OP_BIT_W-1:0]  ibit;    // input bit m (row of the input sub-array)
    logic [OP_BIT_W-1:0]  wbit;    // weight bit n (row of the weight sub-array)
  } pe_op_t;

  localparam pe_op_t PE_OP_IDLE = '0;

  // Result width of one kernel: bitcount <= KSIZE, shifted by up to IBITS+WBITS-2,
  // summed over IBITS*WBITS terms; the exact bound is (2^IBITS-1)(2^WBITS-1)KSIZE.
  function automatic int acc_width(int ibits, int wbits, int ksize);
    return ibits + wbits + $clog2(ksize + 1);
  endfunction

endpackage
