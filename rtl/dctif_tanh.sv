// dctif_tanh -- hyperbolic tangent approximation with a DCT interpolation
// filter (top level).
//
// tanh is split into three regions.  Close to zero tanh(z) ~ z and the input
// is passed through; far from zero tanh(z) ~ 1 and all output bits are set;
// in between (the Processing Region) the result is a stored sample or is
// interpolated from four neighbouring samples by the DCTIF filter.  An input
// range decoder picks the region and a 4-input multiplexer the result.
//
// Interface: z is a non-negative input (N_INT.N_FRAC unsigned fixed point);
// tanh_out an unsigned NOUT-bit fraction.  Negative inputs are served by
// the caller through tanh(-z) = -tanh(z), which the paper notes but does not
// draw.  Handshake: an input is taken when in_valid and in_ready are both
// high; in_ready drops for one cycle after each accepted input, so at most
// one input every two cycles is taken.  out_valid pulses three cycles after
// acceptance, for every region alike, with tanh_out held until the next
// result.
module dctif_tanh
  import dctif_pkg::*;
#(
  parameter int NINP  = N_INP,
  parameter int NFRAC = N_FRAC,
  parameter int NOUT  = N_OUT,
  parameter int SFRAC = SAMPLE_FRAC,
  parameter int NSAMP = NUM_SAMPLES,
  parameter int PASS_LIMIT = PASS_LIM,
  parameter int SAT_LIMIT  = SAT_LIM
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  output logic            in_ready,
  input  logic [NINP-1:0] z,
  output logic            out_valid,
  output logic [NOUT-1:0] tanh_out
);
  region_e         region, region_q1, region_q2;
  logic [NINP-1:0] z_q1, z_q2;
  logic            accept, busy, dc_valid;
  logic [NOUT-1:0] sample, dctif;

  input_range_decoder #(
    .NINP(NINP), .NFRAC(NFRAC), .GFRAC(SFRAC + J), .JBITS(J),
    .PASS_LIMIT(PASS_LIMIT), .SAT_LIMIT(SAT_LIMIT)
  ) u_range (.z(z), .region(region));

  assign in_ready = !busy;
  assign accept   = in_valid && in_ready;

  dctif_approximation #(
    .NINP(NINP), .NFRAC(NFRAC), .NOUT(NOUT), .SFRAC(SFRAC), .NSAMP(NSAMP)
  ) u_dctif (
    .clk(clk), .rst_n(rst_n), .start(accept), .z(z), .region(region),
    .busy(busy), .valid(dc_valid), .sample(sample), .dctif(dctif)
  );

  // Carry region and input along with the two-cycle evaluation.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      region_q1 <= RGN_PASS;
      region_q2 <= RGN_PASS;
      z_q1      <= '0;
      z_q2      <= '0;
    end else begin
      if (accept) begin
        region_q1 <= region;
        z_q1      <= z;
      end
      region_q2 <= region_q1;
      z_q2      <= z_q1;
    end
  end

  tanh_output_mux #(.NINP(NINP), .NFRAC(NFRAC), .NOUT(NOUT)) u_mux (
    .clk(clk), .rst_n(rst_n), .in_valid(dc_valid), .region(region_q2),
    .z(z_q2), .sample(sample), .dctif(dctif),
    .out_valid(out_valid), .tanh_out(tanh_out)
  );

  // At most one result every two cycles.
  assert property (@(posedge clk) disable iff (!rst_n) out_valid |=> !out_valid)
    else $error("dctif_tanh: results closer than two cycles");
endmodule
