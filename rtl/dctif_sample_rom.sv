// dctif_sample_rom -- the "Samples BRAM": stored tanh samples, two read ports.
//
// Word k holds round(tanh(k * h) * 2^NOUT), h = 2^-SFRAC, limited to
// 2^NOUT - 1, for k = 0 .. NSAMP-1.  The table is computed while the design
// is elaborated, so it needs no data file; an FPGA tool maps it to a block
// RAM with initial contents.  Both ports read synchronously: an address
// presented in one cycle gives its word in the next.  The "A/D" port and the
// "B/C" port are the two BRAM outputs of the paper's datapath figure.  The
// paper does not state the sample spacing or width; 16-bit samples 1/64
// apart are this design's choice.  With the four-tap s = 4 coefficients
// that spacing gives the ~1e-3 maximum error the paper plots for this
// configuration; samples 1/16 apart would give about 3.8e-3.
module dctif_sample_rom
  import dctif_pkg::*;
#(
  parameter int NOUT  = N_OUT,
  parameter int SFRAC = SAMPLE_FRAC,
  parameter int NSAMP = NUM_SAMPLES,
  parameter int AW    = $clog2(NSAMP)
) (
  input  logic            clk,
  input  logic [AW-1:0]   addr_ad,
  input  logic [AW-1:0]   addr_bc,
  output logic [NOUT-1:0] q_ad,
  output logic [NOUT-1:0] q_bc
);
  typedef logic [NOUT-1:0] rom_t [NSAMP];

  function automatic rom_t tanh_table();
    rom_t t;
    real  full, v;
    full = real'(64'(1) << NOUT);
    for (int k = 0; k < NSAMP; k++) begin
      v = $floor($tanh(real'(k) / real'(64'(1) << SFRAC)) * full + 0.5);
      t[k] = (v >= full - 1.0) ? '1 : NOUT'(longint'(v));
    end
    return t;
  endfunction

  // One array read through two ports, as a dual-port block RAM.
  logic [NOUT-1:0] mem [NSAMP] = tanh_table();

  always_ff @(posedge clk) begin
    q_ad <= mem[addr_ad];
    q_bc <= mem[addr_bc];
  end
endmodule
