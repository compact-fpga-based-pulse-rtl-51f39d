// tb_pmt_counter: drives random PMT edge pulses (including pulses in
// consecutive clocks, i.e. the full 100 MHz rate) and checks every gate
// window's count against a count made by the testbench, window by window,
// and that windows are exactly `period` clocks long and back to back.
module tb_pmt_counter;
  localparam int DEPTH = 64;
  logic clk = 0, rst = 1, enable = 0, pmt_rise = 0, rd_en = 0, empty, overflow;
  logic [31:0] period = 32'd50, rd_data;
  logic [$clog2(DEPTH+1)-1:0] level;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  pmt_counter #(.CNT_W(32), .DEPTH(DEPTH)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int exp_counts[$];
  initial begin
    int c;
    repeat (3) @(posedge clk);
    rst = 0;
    @(negedge clk) enable = 1;
    for (int w = 0; w < 12; w++) begin
      c = 0;
      for (int k = 0; k < period; k++) begin
        pmt_rise = (w == 3) ? 1'b1 : ($urandom_range(0, 99) < 20);
        if (pmt_rise) c++;
        @(negedge clk);
      end
      exp_counts.push_back(c);
    end
    pmt_rise = 0;
    repeat (3) @(negedge clk);
    enable = 0;
    check(level == 12, $sformatf("12 windows stored, got %0d", level));
    for (int w = 0; w < 12; w++) begin
      check(!empty && rd_data == exp_counts[w],
            $sformatf("window %0d count %0d exp %0d", w, rd_data, exp_counts[w]));
      rd_en = 1; @(negedge clk); rd_en = 0;
    end
    check(exp_counts[3] == period, "full-rate window");
    check(empty && !overflow, "drained");
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
