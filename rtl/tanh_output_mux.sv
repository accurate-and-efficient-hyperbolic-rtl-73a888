// tanh_output_mux -- the 4-input output multiplexer of the tanh unit.
//
// Selects, by the select lines {S2, S1} (dctif_pkg::region_e), one of
//   Pass Region        : the input truncated to its NOUT fraction bits
//                        (integer bits dropped; they are zero there),
//   Saturation Region  : all ones, the largest output value (~1),
//   stored sample      : the BRAM word p(i),
//   interpolate        : the DCTIF filter output,
// and registers the result together with a valid flag.  The four sources and
// the all-ones saturation value follow the paper; the output register is
// this design's choice (one cycle).
module tanh_output_mux
  import dctif_pkg::*;
#(
  parameter int NINP  = N_INP,
  parameter int NFRAC = N_FRAC,
  parameter int NOUT  = N_OUT
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  region_e         region,
  input  logic [NINP-1:0] z,
  input  logic [NOUT-1:0] sample,
  input  logic [NOUT-1:0] dctif,
  output logic            out_valid,
  output logic [NOUT-1:0] tanh_out
);
  logic [NOUT-1:0] truncated, selected;

  // Keep the NOUT most significant fraction bits of z.
  assign truncated = z[NFRAC-1 -: NOUT];

  always_comb begin
    unique case (region)
      RGN_PASS:   selected = truncated;
      RGN_SAT:    selected = '1;
      RGN_SAMPLE: selected = sample;
      RGN_INTERP: selected = dctif;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      tanh_out  <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) tanh_out <= selected;
    end
  end
endmodule
