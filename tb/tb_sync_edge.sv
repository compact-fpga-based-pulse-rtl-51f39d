// tb_sync_edge: checks that each rising edge of the asynchronous input gives
// exactly one `rise` pulse, two clocks after the input is sampled, and that
// `level` follows the input with the same delay.
module tb_sync_edge;
  logic clk = 0, rst = 1, d = 0, level, rise;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  sync_edge dut (.clk, .rst, .d, .level, .rise);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int n_rise = 0, n_edges = 0;
  always @(posedge clk) if (!rst && rise) n_rise++;

  initial begin
    repeat (3) @(posedge clk);
    rst = 0;
    for (int k = 0; k < 20; k++) begin
      int hi, lo;
      hi = 1 + $urandom_range(0, 4);
      lo = 1 + $urandom_range(0, 4);
      @(negedge clk) d = 1; n_edges++;
      // sampled at the next posedge, visible on level two posedges later
      @(posedge clk); #1;
      check(level == 0, "level too early");
      @(posedge clk); #1;
      check(level == 1 && rise == 1, "level/rise after 2 clocks");
      repeat (hi - 1) begin @(posedge clk); #1; check(rise == 0, "single pulse"); end
      @(negedge clk) d = 0;
      repeat (lo + 2) @(posedge clk);
      #1 check(level == 0, "level low");
    end
    check(n_rise == n_edges, $sformatf("rise count %0d vs %0d", n_rise, n_edges));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
