// tb_dctif_interp_datapath -- drives the two-cycle pair sequence for the
// positions 1/4, 1/2 and 3/4 with random taps (monotone ones like tanh
// samples, and fully random ones that exercise the output limits) and
// compares the result with the filter equations computed directly.
module tb_dctif_interp_datapath;
  import tb_dctif_ref_pkg::*;

  logic        clk = 0, rst_n = 0;
  logic [15:0] ad, bc, dctif;
  logic        sel_15, sel_ten, sel_zero, load;
  int checks = 0, failures = 0, n_low = 0, n_high = 0;

  dctif_interp_datapath dut (.clk(clk), .rst_n(rst_n), .ad(ad), .bc(bc),
    .sel_15(sel_15), .sel_ten(sel_ten), .sel_zero(sel_zero), .load(load),
    .dctif(dctif));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic drive(int a_or_d, int b_or_c, bit s15, bit ten, bit zero, bit ld);
    @(negedge clk);
    ad = 16'(a_or_d); bc = 16'(b_or_c);
    sel_15 = s15; sel_ten = ten; sel_zero = zero; load = ld;
  endtask

  task automatic run(int a, int b, int c, int d, int r);
    int exp;
    case (r)
      1: begin drive(a, b, 1, 0, 0, 1); drive(d, c, 0, 0, 1, 0); end
      2: begin drive(a, b, 0, 1, 0, 1); drive(d, c, 0, 1, 0, 0); end
      default: begin drive(d, c, 1, 0, 0, 1); drive(a, b, 0, 0, 1, 0); end
    endcase
    #1;
    exp = ref_filter(a, b, c, d, r);
    if (exp == 0) n_low++;
    if (exp == 65535) n_high++;
    checks++;
    if (int'(dctif) != exp) begin
      failures++;
      if (failures < 10)
        $display("r=%0d A=%0d B=%0d C=%0d D=%0d dctif=%0d expected %0d",
                 r, a, b, c, d, dctif, exp);
    end
  endtask

  initial begin
    int a, b, c, d;
    ad = 0; bc = 0; sel_15 = 0; sel_ten = 0; sel_zero = 0; load = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      if (n % 2 == 0) begin
        a = $urandom_range(60000);
        b = a + $urandom_range(1500);
        c = b + $urandom_range(1500);
        d = c + $urandom_range(1500);
        if (d > 65535) begin a = 62000; b = 63500; c = 64800; d = 65535; end
      end else begin
        a = $urandom_range(65535); b = $urandom_range(65535);
        c = $urandom_range(65535); d = $urandom_range(65535);
      end
      run(a, b, c, d, 1 + n % 3);
    end
    // plateau near one: the sum just exceeds 16 * 65535 at position 1/4
    run(65000, 65535, 65535, 65535, 1);
    checks++;
    if (n_low == 0 || n_high == 0) begin
      failures++;
      $display("output limits not exercised: low=%0d high=%0d", n_low, n_high);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
