// dctif_interp_datapath -- shift-and-add DCTIF filter with accumulator.
//
// Evaluates the four-tap, s = 4 interpolation equations
//   p(i+1/4) = -2A + 15B + 3C,  p(i+1/2) = -2A + 10B + 10C - 2D
// (p(i+3/4) is p(i+1/4) with the taps mirrored by the address decoder) as
// two "pairs", one per clock cycle, and sums them in an accumulator:
//   x15_3 = (bc << 4 or << 2) - bc          15X or 3X     (mux + subtractor)
//   x10   = (bc << 3) + (bc << 1)           10X           (adder)
//   m     = sel_ten ? x10 : x15_3                         (mux)
//   y     = sel_zero ? 0 : (ad << 1)        2Y or ZERO    (mux)
//   pair  = m - y                                         (subtractor)
// In the first cycle (load = 1) pair is stored in REG; in the second cycle
// the output is (REG + pair) >> 4.  These are the three multiplexers, two
// subtractors and one adder of the paper's datapath figure.
//
// Interface: ad, bc are the two BRAM words of the current cycle; sel_15,
// sel_ten, sel_zero pick the pair; load marks the first cycle.  dctif is
// combinational from REG and the current inputs and is meaningful in the
// second cycle.  The >> 4 truncates, as drawn; limiting the result to
// [0, 2^NOUT - 1] is this design's addition so that a value just under one
// cannot wrap.
module dctif_interp_datapath
  import dctif_pkg::*;
#(
  parameter int NOUT   = N_OUT,
  parameter int SSCALE = S
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [NOUT-1:0] ad,        // A or D
  input  logic [NOUT-1:0] bc,        // B or C
  input  logic            sel_15,    // 1: 15X, 0: 3X
  input  logic            sel_ten,   // 1: 10X instead of 15X/3X
  input  logic            sel_zero,  // 1: subtract zero instead of 2Y
  input  logic            load,      // first cycle of an evaluation
  output logic [NOUT-1:0] dctif
);
  localparam int W = NOUT + 7;  // signed: 16 * max word plus sign and margin

  logic signed [W-1:0] x, y2, x15_3, x10, m, y, pair, acc_q, sum, scaled;

  assign x      = W'(bc);
  assign y2     = W'(ad) <<< 1;
  assign x15_3  = (sel_15 ? (x <<< 4) : (x <<< 2)) - x;
  assign x10    = (x <<< 3) + (x <<< 1);
  assign m      = sel_ten ? x10 : x15_3;
  assign y      = sel_zero ? '0 : y2;
  assign pair   = m - y;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    acc_q <= '0;
    else if (load) acc_q <= pair;
  end

  assign sum    = acc_q + pair;
  assign scaled = sum >>> SSCALE;

  always_comb begin
    if (scaled < 0)                            dctif = '0;
    else if (scaled > W'((1 << NOUT) - 1))     dctif = '1;
    else                                       dctif = scaled[NOUT-1:0];
  end
endmodule
