// tb_control_unit: runs three batches (5 queries, 0 queries, 3 queries) and
// checks that fetch_en and busy rise on start, stay up exactly until the
// last score of the batch, that done is then held, that queries_done counts
// the scores, that start is ignored while busy, and that cycles equals the
// number of clock cycles the batch was busy.
module tb_control_unit;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, score_fire, fetch_en, busy, done;
  logic [15:0] num_queries, queries_done;
  logic [31:0] cycles;

  control_unit dut (.*);

  task automatic check(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic batch(int n);
    int busy_cycles;
    @(negedge clk) start = 1; num_queries = 16'(n);
    @(negedge clk) start = 0;
    if (n == 0) begin
      check(!busy && done && !fetch_en, "empty batch finishes at once");
      return;
    end
    check(busy && fetch_en && !done, "busy after start");
    busy_cycles = 1;
    for (int q = 0; q < n; q++) begin
      repeat (int'($urandom % 20)) begin
        @(negedge clk); busy_cycles++;
        if (q == 0) begin start = 1; num_queries = 16'(99); end   // ignored while busy
      end
      @(negedge clk) start = 0;
      check(busy, "busy until last score");
      score_fire = 1;
      @(negedge clk) score_fire = 0;
      busy_cycles += 2;
    end
    check(!busy && done && !fetch_en, "done after last score");
    check(int'(queries_done) == n, "queries_done");
    check(cycles > 0 && int'(cycles) <= busy_cycles, "cycle count");
    repeat (5) @(negedge clk);
    check(done && !busy, "done held");
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    start = 0; score_fire = 0; num_queries = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk);
    check(!busy && !done && !fetch_en, "idle after reset");
    batch(5);
    batch(0);
    batch(3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
