// tb_input_range_decoder -- checks the region decision for every point of
// the 1/256 interpolation grid from 0 to 16, each with random bits below the
// grid, against the golden model.  Also checks that every region occurs.
module tb_input_range_decoder;
  import dctif_pkg::*;
  import tb_dctif_ref_pkg::*;

  logic [19:0] z;
  region_e     region;
  int checks = 0, failures = 0;
  int seen [4];

  input_range_decoder dut (.z(z), .region(region));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (seen[k]) seen[k] = 0;
    for (int g = 0; g < 4096; g++) begin
      for (int rep = 0; rep < 3; rep++) begin
        z = 20'(g * 256 + ((rep == 0) ? 0 : (rep == 1) ? 255 : $urandom_range(255)));
        #1;
        checks++;
        if (int'(region) != ref_region(z)) begin
          failures++;
          if (failures < 10)
            $display("z=%h grid=%0d region=%0d expected %0d", z, g, region, ref_region(z));
        end
        seen[int'(region)]++;
      end
    end
    foreach (seen[k]) begin
      checks++;
      if (seen[k] == 0) begin
        failures++;
        $display("region %0d never seen", k);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
