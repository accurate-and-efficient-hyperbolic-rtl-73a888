// tb_dctif_addr_decoder -- checks the tap addresses of both phases for every
// grid point of the Processing Region, and the zero addresses outside it.
// Expected: phase 0 reads (A, B) = (i-1, i), or (D, C) = (i+2, i+1) at
// position 3/4; phase 1 reads (D, C) at positions 1/4 and 1/2, else (A, B).
module tb_dctif_addr_decoder;
  import dctif_pkg::*;
  import tb_dctif_ref_pkg::*;

  logic [19:0] z;
  region_e     region;
  logic        phase;
  logic [7:0]  addr_ad, addr_bc;
  int checks = 0, failures = 0;

  dctif_addr_decoder dut (.z(z), .region(region), .phase(phase),
                          .addr_ad(addr_ad), .addr_bc(addr_bc));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(int exp_ad, int exp_bc);
    checks++;
    if (int'(addr_ad) != exp_ad || int'(addr_bc) != exp_bc) begin
      failures++;
      if (failures < 10)
        $display("z=%h phase=%0d addr=(%0d,%0d) expected (%0d,%0d)",
                 z, phase, addr_ad, addr_bc, exp_ad, exp_bc);
    end
  endtask

  initial begin
    int g, i, r, rg;
    for (g = 0; g < 4096; g++) begin
      z      = 20'(g * 256 + $urandom_range(255));
      rg     = ref_region(z);
      region = region_e'(rg);
      i = g / 4;
      r = g % 4;
      for (int ph = 0; ph < 2; ph++) begin
        phase = ph[0];
        #1;
        if (rg == R_PASS || rg == R_SAT) check(0, 0);
        else if ((ph == 0 && r == 3) || (ph == 1 && (r == 1 || r == 2)))
          check(i + 2, i + 1);
        else
          check(i - 1, i);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
