// dctif_pkg -- types and constants shared by the DCTIF tanh approximation.
//
// The tanh unit takes a non-negative fixed-point input z (N_INT integer
// bits, N_FRAC fraction bits) and returns an unsigned N_OUT-bit fraction
// approximating tanh(z).  The Processing Region between the Pass and the
// Saturation Regions is covered by stored tanh samples spaced 2^-SAMPLE_FRAC
// apart; between two samples the unit interpolates 2^J - 1 points with a
// four-tap DCT interpolation filter (DCTIF) whose coefficients are scaled by
// 2^S.  Four taps, alpha = 1/4 (J = 2) and s = 4 follow the architecture the
// paper draws in detail; the word widths, the sample spacing and the region
// limits are this design's own choice (the paper leaves them open) and are
// collected here.
package dctif_pkg;

  // ---- Fixed-point formats (own choice) ----------------------------------
  localparam int N_INT  = 4;              // integer bits of z: z in [0, 16)
  localparam int N_FRAC = 16;             // fraction bits of z
  localparam int N_INP  = N_INT + N_FRAC; // input width
  localparam int N_OUT  = 16;             // output fraction bits, tanh in [0, 1)

  // ---- DCTIF configuration ----------------------------------------------
  localparam int TAPS        = 4;  // filter taps A, B, C, D (paper, Fig. 5)
  localparam int J           = 2;  // alpha = 2^-J = 1/4 (paper, Fig. 5)
  localparam int S           = 4;  // coefficient scale 2^S (paper, Fig. 5)
  localparam int SAMPLE_FRAC = 6;  // sample spacing h = 1/64 (own choice)

  // Interpolation grid: one grid step is 2^-(SAMPLE_FRAC+J) = 1/256.  Region
  // limits are given in grid steps (own choice, sized for a 1e-3 target
  // error, the level the paper's error plot shows for this configuration).
  localparam int GRID_FRAC   = SAMPLE_FRAC + J;
  localparam int PASS_LIM    = 36;   // z <  36/256  (0.1406) -> tanh(z) ~ z
  localparam int SAT_LIM     = 973;  // z >= 973/256 (3.8008) -> tanh(z) ~ 1
  localparam int NUM_SAMPLES = 256;  // samples k/64, k = 0..255 (4 kbits)

  // ---- Region encoding on the select lines {S2, S1} (own encoding) -------
  typedef enum logic [1:0] {
    RGN_PASS   = 2'b00,  // output = truncated input
    RGN_SAT    = 2'b01,  // output = all ones
    RGN_SAMPLE = 2'b10,  // Processing Region, z on a stored sample
    RGN_INTERP = 2'b11   // Processing Region, z between two samples
  } region_e;

  // ---- Table 1 coefficients, 4 taps, s = 4 --------------------------------
  // p(i+1/4) = -2A + 15B +  3C + 0D
  // p(i+1/2) = -2A + 10B + 10C - 2D
  // p(i+3/4) =  0A +  3B + 15C - 2D
  // They are realised as shifts and adds in dctif_interp_datapath.

endpackage
