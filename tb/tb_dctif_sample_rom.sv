// tb_dctif_sample_rom -- reads every word through both ports (in opposite
// orders) and checks it against round(tanh(k/64) * 2^16), and that the word
// appears exactly one clock after its address.
module tb_dctif_sample_rom;
  import tb_dctif_ref_pkg::*;

  logic        clk = 0;
  logic [7:0]  addr_ad, addr_bc;
  logic [15:0] q_ad, q_bc;
  int checks = 0, failures = 0;

  dctif_sample_rom dut (.clk(clk), .addr_ad(addr_ad), .addr_bc(addr_bc),
                        .q_ad(q_ad), .q_bc(q_bc));

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 256; k++) begin
      @(negedge clk);
      addr_ad = 8'(k);
      addr_bc = 8'(255 - k);
      @(posedge clk);
      #1;
      checks++;
      if (int'(q_ad) != ref_sample(k) || int'(q_bc) != ref_sample(255 - k)) begin
        failures++;
        if (failures < 10)
          $display("k=%0d q_ad=%0d exp %0d q_bc=%0d exp %0d",
                   k, q_ad, ref_sample(k), q_bc, ref_sample(255 - k));
      end
      // address changes after the edge must not reach the outputs
      addr_ad = 8'(k + 1);
      #1;
      checks++;
      if (int'(q_ad) != ref_sample(k)) begin
        failures++;
        $display("k=%0d read is not registered", k);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
