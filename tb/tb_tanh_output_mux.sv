// tb_tanh_output_mux -- random inputs for each select value; checks the
// registered output one cycle later: truncated input, all ones, sample or
// DCTIF word, and that the output holds while in_valid is low.
module tb_tanh_output_mux;
  import dctif_pkg::*;

  logic        clk = 0, rst_n = 0, in_valid, out_valid;
  region_e     region;
  logic [19:0] z;
  logic [15:0] sample, dctif, tanh_out, exp_q;
  logic        v_q;
  int checks = 0, failures = 0;

  tanh_output_mux dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid),
    .region(region), .z(z), .sample(sample), .dctif(dctif),
    .out_valid(out_valid), .tanh_out(tanh_out));

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; region = RGN_PASS; z = 0; sample = 0; dctif = 0;
    exp_q = 0; v_q = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      in_valid = ($urandom_range(3) != 0);
      region   = region_e'(n % 4);
      z        = 20'($urandom);
      sample   = 16'($urandom);
      dctif    = 16'($urandom);
      v_q      = in_valid;
      if (in_valid)
        case (n % 4)
          0: exp_q = z[15:0];
          1: exp_q = 16'hFFFF;
          2: exp_q = sample;
          default: exp_q = dctif;
        endcase
      @(posedge clk);
      #1;
      checks++;
      if (out_valid !== v_q || tanh_out !== exp_q) begin
        failures++;
        if (failures < 10)
          $display("sel=%0d out=%h valid=%b expected %h %b", n % 4, tanh_out, out_valid, exp_q, v_q);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
