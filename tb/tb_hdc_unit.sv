// tb_hdc_unit: end-to-end test of the HDC unit. Runs three instances side by
// side: the default configuration (2 warps x 4 threads, one lane of 32
// arithmetic units, so four cycles per warp instruction), a one-cycle
// configuration with a lane per thread, and an uneven one with 3 lanes for
// 4 threads. Each is checked by hdc_unit_tester against a model.
module tb_hdc_unit;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic d0, d1, d2;
  int   c0, c1, c2, f0, f1, f2;
  int   checks, failures;
  int   cycles = 0;

  hdc_unit_tester #(.DEFAULTS(1'b1))                     t_def (.clk, .rst_n, .done(d0), .checks(c0), .failures(f0));
  hdc_unit_tester #(.NUM_WARPS(2), .NUM_THREADS(4), .NUM_LANES(4)) t_l4 (.clk, .rst_n, .done(d1), .checks(c1), .failures(f1));
  hdc_unit_tester #(.NUM_WARPS(2), .NUM_THREADS(4), .NUM_LANES(3)) t_l3 (.clk, .rst_n, .done(d2), .checks(c2), .failures(f2));

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (d0 && d1 && d2);
    checks = c0 + c1 + c2;
    failures = f0 + f1 + f2;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    cycles++;
    if (cycles > 200000) begin
      $display("watchdog expired");
      $display("TB_RESULT checks=%0d failures=%0d", c0 + c1 + c2, f0 + f1 + f2 + 1);
      $finish;
    end
  end
endmodule
