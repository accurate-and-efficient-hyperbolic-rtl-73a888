// dctif_addr_decoder -- BRAM addresses of the filter taps A, B, C, D.
//
// For an input z in the Processing Region, i = floor(z / h) is the index of
// the stored sample just below z and r (the J bits under it) is the position
// of z between samples i and i+1.  The taps are A = p(i-1), B = p(i),
// C = p(i+1), D = p(i+2).  The interpolation takes two cycles (phase 0 and
// phase 1); in each the BRAM's two read ports deliver one "A/D" word and one
// "B/C" word:
//
//   r         phase 0 (ad, bc)    phase 1 (ad, bc)
//   0 (B)     A, B                A, B        (B is the stored sample)
//   1 (1/4)   A, B                D, C        -2A+15B  then  3C-0
//   2 (1/2)   A, B                D, C        -2A+10B  then 10C-2D
//   3 (3/4)   D, C                A, B        -2D+15C  then  3B-0
//
// The position 3/4 reuses the 1/4 hardware with the taps mirrored, as the
// paper proposes.  Outside the Processing Region (select lines say Pass or
// Saturation) both addresses are held at zero.  Combinational; the BRAM
// registers the addresses.
module dctif_addr_decoder
  import dctif_pkg::*;
#(
  parameter int NINP   = N_INP,
  parameter int NFRAC  = N_FRAC,
  parameter int SFRAC  = SAMPLE_FRAC,
  parameter int JBITS  = J,
  parameter int NSAMP  = NUM_SAMPLES,
  parameter int AW     = $clog2(NSAMP)
) (
  input  logic [NINP-1:0] z,
  input  region_e         region,   // select lines {S2, S1}
  input  logic            phase,    // 0: first pair, 1: second pair
  output logic [AW-1:0]   addr_ad,  // address of the A/D read port
  output logic [AW-1:0]   addr_bc   // address of the B/C read port
);
  localparam int IW = NINP - NFRAC + SFRAC;  // width of the sample index i

  logic [IW-1:0]    idx;
  logic [JBITS-1:0] r;
  logic [AW-1:0]    i_m1, i_0, i_p1, i_p2;
  logic             mirror, second_far;

  assign idx  = z[NINP-1 -: IW];
  assign r    = z[NFRAC-SFRAC-1 -: JBITS];
  assign i_0  = AW'(idx);
  assign i_m1 = i_0 - AW'(1);
  assign i_p1 = i_0 + AW'(1);
  assign i_p2 = i_0 + AW'(2);

  // Position above 1/2: taps are mirrored (D, C first).
  assign mirror     = r > JBITS'(1 << (JBITS - 1));
  // Which phase reads the far pair (D, C)?
  assign second_far = (phase == 1'b0) ? mirror : (!mirror && r != '0);

  always_comb begin
    if (region == RGN_SAMPLE || region == RGN_INTERP) begin
      addr_ad = second_far ? i_p2 : i_m1;
      addr_bc = second_far ? i_p1 : i_0;
    end else begin
      addr_ad = '0;
      addr_bc = '0;
    end
  end
endmodule
