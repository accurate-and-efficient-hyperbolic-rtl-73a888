// tb_dctif_approximation -- starts the Processing Region unit on every grid
// point of the Processing Region (back to back and with idle gaps) and
// checks that "valid" comes exactly two cycles after "start", that "busy"
// marks the cycle in between, and that dctif (interpolated points) or sample
// (points on a stored sample) equals the golden model.
module tb_dctif_approximation;
  import dctif_pkg::*;
  import tb_dctif_ref_pkg::*;

  logic        clk = 0, rst_n = 0;
  logic        start, busy, valid;
  logic [19:0] z;
  region_e     region;
  logic [15:0] sample, dctif;
  int checks = 0, failures = 0;
  logic [19:0] z_pipe [3];
  logic        s_pipe [3];

  dctif_approximation dut (.clk(clk), .rst_n(rst_n), .start(start), .z(z),
    .region(region), .busy(busy), .valid(valid), .sample(sample), .dctif(dctif));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Scoreboard: the start of two cycles ago must show up as valid now.
  always @(posedge clk) if (rst_n) begin
    #1;
    checks++;
    if (valid !== s_pipe[1] || busy !== s_pipe[0]) begin
      failures++;
      $display("timing: valid=%b busy=%b expected %b %b", valid, busy, s_pipe[1], s_pipe[0]);
    end
    if (valid && s_pipe[1]) begin
      int exp, got;
      exp = ref_tanh(z_pipe[1]);
      got = (ref_region(z_pipe[1]) == R_SAMPLE) ? int'(sample) : int'(dctif);
      checks++;
      if (got != exp) begin
        failures++;
        if (failures < 10) $display("z=%h got %0d expected %0d", z_pipe[1], got, exp);
      end
    end
  end

  always @(posedge clk) begin
    s_pipe[1] <= s_pipe[0];
    z_pipe[1] <= z_pipe[0];
    s_pipe[0] <= start && rst_n;
    z_pipe[0] <= z;
  end

  initial begin
    s_pipe[0] = 0; s_pipe[1] = 0;
    start = 0; z = 0; region = RGN_PASS;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int pass = 0; pass < 2; pass++) begin
      for (int g = REF_PASS; g < REF_SAT; g++) begin
        @(negedge clk);
        start  = 1;
        z      = 20'(g * 256 + $urandom_range(255));
        region = region_e'(ref_region(z));
        @(negedge clk);
        start  = 0;
        z      = 20'($urandom);   // must not disturb the running evaluation
        if (pass == 1) repeat ($urandom_range(2)) @(negedge clk);
      end
    end
    repeat (4) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
