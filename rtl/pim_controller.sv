// pim_controller -- sequences the bit-wise convolution in every PE.
//
// For each PE the controller walks all unpruned filters f and, for each, every
// pair (m, n) of input bit and weight bit, issuing one pe_op_t per cycle. The
// sub-arrays marked in the LUT row of that PE are skipped without costing a
// cycle (the next unpruned filter is found by a priority search over the row).
// Every PE has its own lane, so PEs whose channel keeps fewer kernels finish
// earlier; the engine is done when the last lane is.
//
// Timing: `start` is taken at a clock edge when not busy. Lane p then issues
// K_p*IBITS*WBITS ops in consecutive cycles (K_p = unpruned filters of PE p),
// loop order filter > input bit > weight bit. `done` pulses one cycle, one
// edge after the last op of the slowest lane, which is the edge at which that
// op's result leaves the PE pipeline. With every kernel pruned, `done` follows
// `start` after one cycle. `busy` is high from the start edge until `done`.
// The LUT must not change while busy.
//
// Paper: a controller and LUT drive the PEs, pruned sub-arrays are skipped, PEs
// work in parallel and individually. Own choice: lanes, loop order, timing.
module pim_controller
  import pim_pkg::*;
#(
  parameter int NUM_PE = DEF_NUM_PE,
  parameter int NFILT  = DEF_NFILT,
  parameter int IBITS  = DEF_IBITS,
  parameter int WBITS  = DEF_WBITS
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [NFILT-1:0] pruned [NUM_PE],
  output pe_op_t           op     [NUM_PE],
  output logic             busy,
  output logic             done
);
  typedef logic [OP_FILT_W-1:0] filt_t;
  typedef logic [OP_BIT_W-1:0]  bit_t;

  logic  lane_run [NUM_PE];
  filt_t lane_f   [NUM_PE];
  bit_t  lane_m   [NUM_PE];
  bit_t  lane_n   [NUM_PE];
  logic  active;
  logic  any_run;
  logic  first_fnd [NUM_PE];   // lane has an unpruned filter at all
  filt_t first_f   [NUM_PE];   // its lowest unpruned filter
  logic  next_fnd  [NUM_PE];   // lane has an unpruned filter after lane_f
  filt_t next_f    [NUM_PE];

  // Lowest unpruned filter with index >= from; found = 0 when there is none.
  function automatic void next_kept(input logic [NFILT-1:0] row, input int from,
                                    output logic found, output filt_t idx);
    found = 1'b0;
    idx   = '0;
    for (int f = NFILT - 1; f >= 0; f--) begin
      if (f >= from && !row[f]) begin
        found = 1'b1;
        idx   = filt_t'(f);
      end
    end
  endfunction

  always_comb begin
    for (int p = 0; p < NUM_PE; p++) begin
      next_kept(pruned[p], 0, first_fnd[p], first_f[p]);
      next_kept(pruned[p], int'(lane_f[p]) + 1, next_fnd[p], next_f[p]);
    end
  end

  always_comb begin
    any_run = 1'b0;
    for (int p = 0; p < NUM_PE; p++) begin
      any_run      = any_run | lane_run[p];
      op[p].valid  = lane_run[p];
      op[p].first  = (lane_m[p] == '0) && (lane_n[p] == '0);
      op[p].last   = (lane_m[p] == bit_t'(IBITS - 1)) && (lane_n[p] == bit_t'(WBITS - 1));
      op[p].filt   = lane_f[p];
      op[p].ibit   = lane_m[p];
      op[p].wbit   = lane_n[p];
    end
  end

  assign busy = active;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0;
      done   <= 1'b0;
      for (int p = 0; p < NUM_PE; p++) begin
        lane_run[p] <= 1'b0;
        lane_f[p]   <= '0;
        lane_m[p]   <= '0;
        lane_n[p]   <= '0;
      end
    end else begin
      done <= 1'b0;
      if (!active) begin
        if (start) begin
          active <= 1'b1;
          for (int p = 0; p < NUM_PE; p++) begin
            lane_run[p] <= first_fnd[p];
            lane_f[p]   <= first_f[p];
            lane_m[p]   <= '0;
            lane_n[p]   <= '0;
          end
        end
      end else if (!any_run) begin
        active <= 1'b0;
        done   <= 1'b1;
      end else begin
        for (int p = 0; p < NUM_PE; p++) begin
          if (lane_run[p]) begin
            if (lane_n[p] != bit_t'(WBITS - 1)) begin
              lane_n[p] <= lane_n[p] + 1'b1;
            end else begin
              lane_n[p] <= '0;
              if (lane_m[p] != bit_t'(IBITS - 1)) begin
                lane_m[p] <= lane_m[p] + 1'b1;
              end else begin
                lane_m[p]   <= '0;
                lane_run[p] <= next_fnd[p];
                if (next_fnd[p]) lane_f[p] <= next_f[p];
              end
            end
          end
        end
      end
    end
  end
endmodule
