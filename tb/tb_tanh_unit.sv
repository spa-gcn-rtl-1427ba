// tb_tanh_unit: sweeps x over [-10, 10) in steps of 1/256 (plus random
// points) and compares tanh(x) from the unit, one cycle after the input,
// with the exact function computed in floating point: the error must stay
// within 0.04 and the output may never fall by more than 0.01 as x increases (the
// piecewise-linear curve has a tiny step down at its 2.375 breakpoint).
module tb_tanh_unit;
  import spa_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  data_t x, y;
  tanh_unit dut (.clk, .x, .y);

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    real xr, yr, ref_y, worst;
    data_t prev;
    worst = 0.0; prev = -2 * 65536;
    for (int i = -2560; i < 2560 + 500; i++) begin
      @(negedge clk);
      x = (i < 2560) ? data_t'(i * 256) : data_t'(int'($urandom % (20 * 65536)) - 10 * 65536);
      @(negedge clk);                    // registered: result one cycle later
      xr = real'(x) / 65536.0;
      yr = real'(y) / 65536.0;
      ref_y = ($exp(xr) - $exp(-xr)) / ($exp(xr) + $exp(-xr));
      checks++;
      if ((yr - ref_y > 0.04) || (ref_y - yr > 0.04)) begin
        failures++; if (failures < 10) $display("FAIL x=%f y=%f ref=%f", xr, yr, ref_y);
      end
      if ((yr - ref_y) > worst) worst = yr - ref_y;
      if ((ref_y - yr) > worst) worst = ref_y - yr;
      if (i < 2560) begin
        checks++;
        if (y < prev - 656) begin failures++; $display("FAIL not monotonic at x=%f", xr); end
        prev = y;
      end
    end
    $display("  worst error %f", worst);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
