// input_range_decoder -- decides which region of tanh the input z lies in.
//
// The input is reduced to the interpolation grid (steps of 2^-GRID_FRAC;
// finer input bits are ignored) and compared with two limits:
//   grid index <  PASS_LIM  -> Pass Region        (tanh(z) ~ z)
//   grid index >= SAT_LIM   -> Saturation Region  (tanh(z) ~ 1)
//   otherwise               -> Processing Region, split into "z falls on a
//                              stored sample" (the J position bits are zero)
//                              and "z must be interpolated".
// The four outcomes are the decoder's four outputs in the paper; they are
// encoded on the two select lines {S2, S1} as dctif_pkg::region_e (the
// encoding is this design's choice).  Purely combinational.
module input_range_decoder
  import dctif_pkg::*;
#(
  parameter int NINP      = N_INP,
  parameter int NFRAC     = N_FRAC,
  parameter int GFRAC     = GRID_FRAC,
  parameter int JBITS     = J,
  parameter int PASS_LIMIT = PASS_LIM,
  parameter int SAT_LIMIT  = SAT_LIM
) (
  input  logic [NINP-1:0] z,
  output region_e         region
);
  localparam int GW = NINP - NFRAC + GFRAC;  // width of the grid index

  logic [GW-1:0] grid;
  assign grid = z[NINP-1 -: GW];

  always_comb begin
    if (grid < GW'(PASS_LIMIT))          region = RGN_PASS;
    else if (grid >= GW'(SAT_LIMIT))     region = RGN_SAT;
    else if (grid[JBITS-1:0] == '0)      region = RGN_SAMPLE;
    else                                 region = RGN_INTERP;
  end
endmodule
