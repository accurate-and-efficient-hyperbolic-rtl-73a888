// dctif_approximation -- Processing Region unit of the tanh approximation.
//
// Joins the address decoder, the sample BRAM and the interpolation datapath
// and sequences one evaluation over two cycles:
//   cycle c   (start = 1): addresses of the first pair are decoded from z
//                          and registered by the BRAM; z is captured.
//   cycle c+1            : first pair computed from the BRAM words and
//                          stored in the accumulator; addresses of the
//                          second pair are decoded from the captured z.
//   cycle c+2 (valid = 1): second pair computed; "dctif" = accumulator +
//                          pair scaled by 2^-4, and "sample" = the B/C
//                          word, which is the stored sample p(i) when z
//                          falls on a sample.
// A new start may be given in cycle c+2, so one value leaves every two
// cycles, the rate the paper reports.  The two-cycle split and the pairs
// follow the paper; the exact cycle alignment around the synchronous BRAM
// is this design's own.  The unit takes no handshake of its own: the
// caller must not start it in cycle c+1 (asserted below).
module dctif_approximation
  import dctif_pkg::*;
#(
  parameter int NINP  = N_INP,
  parameter int NFRAC = N_FRAC,
  parameter int NOUT  = N_OUT,
  parameter int SFRAC = SAMPLE_FRAC,
  parameter int NSAMP = NUM_SAMPLES
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,    // z and region valid, begin evaluation
  input  logic [NINP-1:0] z,
  input  region_e         region,   // select lines {S2, S1}
  output logic            busy,     // second cycle of an evaluation
  output logic            valid,    // sample/dctif valid this cycle
  output logic [NOUT-1:0] sample,
  output logic [NOUT-1:0] dctif
);
  localparam int AW = $clog2(NSAMP);
  localparam int JB = J;

  logic [NINP-1:0]  z_q;
  region_e          region_q;
  logic [JB-1:0]    r_q1, r_q2;
  logic             ph1_q, ph2_q;

  logic [NINP-1:0]  dec_z;
  region_e          dec_region;
  logic [AW-1:0]    addr_ad, addr_bc;
  logic [NOUT-1:0]  q_ad, q_bc;
  logic [JB-1:0]    r_now;
  logic             sel_15, sel_ten, sel_zero;

  // ---- sequencing -----------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      z_q      <= '0;
      region_q <= RGN_PASS;
      r_q1     <= '0;
      r_q2     <= '0;
      ph1_q    <= 1'b0;
      ph2_q    <= 1'b0;
    end else begin
      ph1_q <= start;
      ph2_q <= ph1_q;
      r_q2  <= r_q1;
      if (start) begin
        z_q      <= z;
        region_q <= region;
        r_q1     <= z[NFRAC-SFRAC-1 -: JB];
      end
    end
  end

  assign busy  = ph1_q;
  assign valid = ph2_q;

  // ---- address decoder: phase 0 from the live input, phase 1 from z_q ----
  assign dec_z      = ph1_q ? z_q : z;
  assign dec_region = ph1_q ? region_q : region;

  dctif_addr_decoder #(
    .NINP(NINP), .NFRAC(NFRAC), .SFRAC(SFRAC), .JBITS(JB), .NSAMP(NSAMP)
  ) u_addr (
    .z(dec_z), .region(dec_region), .phase(ph1_q),
    .addr_ad(addr_ad), .addr_bc(addr_bc)
  );

  dctif_sample_rom #(
    .NOUT(NOUT), .SFRAC(SFRAC), .NSAMP(NSAMP)
  ) u_rom (
    .clk(clk), .addr_ad(addr_ad), .addr_bc(addr_bc), .q_ad(q_ad), .q_bc(q_bc)
  );

  // ---- datapath control: which pair the words in the BRAM output form ----
  // ph1_q = 1: words of phase 0 (first pair); ph2_q = 1: words of phase 1.
  assign r_now = ph1_q ? r_q1 : r_q2;

  always_comb begin
    sel_ten  = (r_now == JB'(2));                 // 10B then 10C
    sel_15   = ph1_q;                             // 15X first, 3X second
    sel_zero = !ph1_q && (r_now != JB'(2));       // 3X pair has no 2Y term
  end

  dctif_interp_datapath #(.NOUT(NOUT), .SSCALE(S)) u_dp (
    .clk(clk), .rst_n(rst_n), .ad(q_ad), .bc(q_bc),
    .sel_15(sel_15), .sel_ten(sel_ten), .sel_zero(sel_zero),
    .load(ph1_q), .dctif(dctif)
  );

  assign sample = q_bc;

  // One evaluation at a time: no start in the second cycle of the previous.
  assert property (@(posedge clk) disable iff (!rst_n) ph1_q |-> !start)
    else $error("dctif_approximation: start while busy");
endmodule
