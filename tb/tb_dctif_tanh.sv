// tb_dctif_tanh -- end-to-end test of the tanh unit at its default size.
//
// Feeds every point of the 1/256 grid over the whole input range [0, 16),
// each with random bits below the grid, first with in_valid held high (so
// the unit throttles the source every other cycle) and then with random
// idle cycles.  Every result is compared bit for bit with the golden model
// and must arrive exactly three cycles after its input was taken; back to
// back results must be two cycles apart.  The test counts how often each
// mechanism occurred -- Pass, Saturation, stored sample, interpolation at
// 1/4, 1/2 and 3/4, and the input being held off -- and fails if one never
// did.  It also reports the largest deviation from the exact tanh of the
// grid point, which must stay below 1.0e-3 (the error the filter with four
// taps, alpha = 1/4, s = 4 is expected to reach).
module tb_dctif_tanh;
  import tb_dctif_ref_pkg::*;

  logic        clk = 0, rst_n = 0;
  logic        in_valid, in_ready, out_valid;
  logic [19:0] z;
  logic [15:0] tanh_out;
  int checks = 0, failures = 0;
  longint cycle = 0;

  typedef struct { logic [19:0] z; longint t; } item_t;
  item_t q [$];
  int    n_events [8];   // pass, sat, sample, r1, r2, r3, stall, back-to-back
  string ev_name [8] = '{"pass", "saturation", "stored sample", "interp 1/4",
                         "interp 1/2", "interp 3/4", "input held off",
                         "back-to-back results"};
  real   max_err = 0.0;
  longint last_out = -10;

  dctif_tanh dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid),
    .in_ready(in_ready), .z(z), .out_valid(out_valid), .tanh_out(tanh_out));

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // input side: record accepted inputs
  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) begin
      int g;
      q.push_back('{z, cycle});
      g = ref_grid(z);
      case (ref_region(z))
        R_PASS:   n_events[0]++;
        R_SAT:    n_events[1]++;
        R_SAMPLE: n_events[2]++;
        default:  n_events[2 + g % 4]++;
      endcase
    end
    if (in_valid && !in_ready) n_events[6]++;
  end

  // output side: compare with the golden model
  always @(posedge clk) if (rst_n && out_valid) begin
    item_t it;
    real   exact, err;
    checks++;
    if (q.size() == 0) begin
      failures++;
      $display("result without input");
    end else begin
      it = q.pop_front();
      if (cycle - it.t != 3) begin
        failures++;
        $display("latency %0d cycles, expected 3", cycle - it.t);
      end
      if (int'(tanh_out) != ref_tanh(it.z)) begin
        failures++;
        if (failures < 10)
          $display("z=%h out=%0d expected %0d", it.z, tanh_out, ref_tanh(it.z));
      end
      exact = $tanh(real'(ref_grid(it.z)) / 256.0);
      if (ref_region(it.z) == R_PASS) exact = $tanh(real'(it.z) / 65536.0);
      err = exact - real'(tanh_out) / 65536.0;
      if (err < 0) err = -err;
      if (err > max_err) max_err = err;
    end
    if (cycle - last_out == 2) n_events[7]++;
    if (cycle - last_out < 2) begin
      failures++;
      $display("results closer than two cycles");
    end
    last_out = cycle;
  end

  task automatic feed(int g, bit gaps);
    @(negedge clk);
    in_valid = 1;
    z = 20'(g * 256 + ((g % 5 == 0) ? 0 : $urandom_range(255)));
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    @(negedge clk);
    in_valid = 0;
    if (gaps) repeat ($urandom_range(2)) @(negedge clk);
  endtask

  initial begin
    foreach (n_events[k]) n_events[k] = 0;
    in_valid = 0; z = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    // back to back: in_valid stays high, in_ready throttles
    @(negedge clk);
    in_valid = 1;
    for (int g = 0; g < 4096; g++) begin
      z = 20'(g * 256 + $urandom_range(255));
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      @(negedge clk);
    end
    in_valid = 0;
    // with idle gaps
    for (int g = 0; g < 4096; g++) feed(g, 1'b1);
    repeat (6) @(negedge clk);
    checks++;
    if (q.size() != 0) begin
      failures++;
      $display("%0d inputs without result", q.size());
    end
    foreach (n_events[k]) begin
      $display("%-22s %0d", ev_name[k], n_events[k]);
      checks++;
      if (n_events[k] == 0) begin
        failures++;
        $display("mechanism never exercised: %s", ev_name[k]);
      end
    end
    $display("max |tanh - out| on the grid: %e", max_err);
    checks++;
    if (max_err > 1.0e-3) begin
      failures++;
      $display("error above 1.0e-3");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
