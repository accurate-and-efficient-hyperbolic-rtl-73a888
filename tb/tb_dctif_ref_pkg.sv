// tb_dctif_ref_pkg -- golden model of the DCTIF tanh unit for testbenches.
//
// Written independently of the RTL from the design's numeric definition:
// input unsigned Q4.16, output unsigned 16-bit fraction, tanh samples every
// 1/64 rounded to 16 bits, interpolation on a 1/256 grid with the four-tap
// s = 4 coefficients {-2,15,3,0}, {-2,10,10,-2}, {0,3,15,-2}, result
// floor(sum / 16) limited to [0, 65535].  Pass Region below 36/256,
// Saturation Region from 973/256 = 3.8008 on.
package tb_dctif_ref_pkg;

  localparam int REF_PASS = 36;
  localparam int REF_SAT  = 973;

  // Region codes as the RTL encodes {S2, S1}.
  localparam int R_PASS = 0, R_SAT = 1, R_SAMPLE = 2, R_INTERP = 3;

  function automatic int ref_sample(int k);
    real v;
    v = $floor($tanh(k / 64.0) * 65536.0 + 0.5);
    if (v > 65535.0) v = 65535.0;
    return int'(v);
  endfunction

  function automatic int ref_grid(logic [19:0] z);
    return int'(z) / 256;             // z * 256 / 65536
  endfunction

  function automatic int ref_region(logic [19:0] z);
    int g;
    g = ref_grid(z);
    if (g < REF_PASS) return R_PASS;
    if (g >= REF_SAT) return R_SAT;
    if (g % 4 == 0)   return R_SAMPLE;
    return R_INTERP;
  endfunction

  // Filter value for sample index i, position r (1..3), from taps A..D.
  function automatic int ref_filter(int a, int b, int c, int d, int r);
    int sum;
    case (r)
      1:       sum = -2 * a + 15 * b + 3 * c;
      2:       sum = -2 * a + 10 * b + 10 * c - 2 * d;
      default: sum = 3 * b + 15 * c - 2 * d;
    endcase
    sum = (sum >= 0) ? sum / 16 : -((-sum + 15) / 16);  // floor
    if (sum < 0) sum = 0;
    if (sum > 65535) sum = 65535;
    return sum;
  endfunction

  function automatic int ref_tanh(logic [19:0] z);
    int g, i, r;
    g = ref_grid(z);
    i = g / 4;
    r = g % 4;
    case (ref_region(z))
      R_PASS:   return int'(z) % 65536;
      R_SAT:    return 65535;
      R_SAMPLE: return ref_sample(i);
      default:  return ref_filter(ref_sample(i - 1), ref_sample(i),
                                  ref_sample(i + 1), ref_sample(i + 2), r);
    endcase
  endfunction

endpackage
