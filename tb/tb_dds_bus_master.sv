// tb_dds_bus_master: pushes random words for random boards with random
// valid gaps, and a clear request in the middle.  A bus monitor captures a
// (data, sel) pair on every rising edge of `wr` and counts `clr` pulses;
// it checks the strobe is high and low for STROBE_CYCLES each, that data
// and select do not change while it is high, and that words arrive in order.
module tb_dds_bus_master;
  import pulser_pkg::*;
  localparam int SC = 4;
  logic clk = 0, rst = 1;
  logic in_valid = 0, in_ready, clr_req = 0, busy;
  logic [15:0] in_data = '0;
  logic [3:0] in_sel = '0;
  dds_bus_t bus;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  dds_bus_master #(.STROBE_CYCLES(SC)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [19:0] sent[$], got[$];
  int n_clr = 0, hi_len = 0, lo_len = 0;
  logic prev_wr = 0;
  logic [19:0] hold;
  always @(posedge clk) if (!rst) begin
    if (bus.wr && !prev_wr) begin got.push_back({bus.sel, bus.data}); hold = {bus.sel, bus.data}; end
    if (bus.wr && prev_wr) check({bus.sel, bus.data} == hold, "data stable during strobe");
    if (bus.wr) hi_len++;
    if (!bus.wr && prev_wr) begin check(hi_len == SC, $sformatf("strobe high %0d", hi_len)); hi_len = 0; end
    if (bus.clr && !dut.bus.wr && $rose(bus.clr)) n_clr++;
    prev_wr = bus.wr;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst = 0;
    for (int i = 0; i < 30; i++) begin
      @(negedge clk);
      in_valid = 1; in_data = 16'($urandom); in_sel = 4'($urandom);
      sent.push_back({in_sel, in_data});
      do @(posedge clk); while (!in_ready);
      @(negedge clk) in_valid = 0;
      if (i == 10) begin clr_req = 1; @(negedge clk) clr_req = 0; end
      repeat ($urandom_range(0, 3)) @(negedge clk);
    end
    repeat (4 * SC) @(negedge clk);
    check(got.size() == sent.size(), $sformatf("%0d words seen", got.size()));
    foreach (sent[i]) check(got[i] == sent[i], $sformatf("word %0d", i));
    check(n_clr == 1, $sformatf("clear pulses %0d", n_clr));
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
