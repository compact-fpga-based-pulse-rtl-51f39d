// tb_pmt_timetagger: generates PMT pulses at random clock cycles over two
// sequence runs and checks that every tag equals the number of clocks
// (10 ns each) from the run's start pulse to the pulse, that tagging stops
// when disabled, and that an overfull buffer raises `overflow`.
module tb_pmt_timetagger;
  localparam int DEPTH = 32;
  logic clk = 0, rst = 1, seq_start = 0, enable = 0, pmt_rise = 0, rd_en = 0, empty, overflow;
  logic [31:0] rd_data;
  logic [$clog2(DEPTH+1)-1:0] level;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  pmt_timetagger #(.TAG_W(32), .DEPTH(DEPTH)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int unsigned exp_tags[$];
  initial begin
    int unsigned t;
    repeat (3) @(posedge clk);
    rst = 0;
    for (int run = 0; run < 2; run++) begin
      @(negedge clk) seq_start = 1; enable = 1;
      @(negedge clk) seq_start = 0;
      t = 0;  // tag value seen in the cycle after the start pulse
      for (int k = 0; k < 200; k++) begin
        pmt_rise = (run == 1 && k < 40) ? 1'b1 : 1'($urandom_range(0, 99) < 6);
        if (pmt_rise && exp_tags.size() < DEPTH) exp_tags.push_back(t);
        @(negedge clk); t++;
      end
      pmt_rise = 0;
    end
    enable = 0;
    rd_en = 1; @(negedge clk); rd_en = 0;  // make room, then pulse while disabled
    void'(exp_tags.pop_front());
    pmt_rise = 1; repeat (5) @(negedge clk); pmt_rise = 0;
    check(level == DEPTH - 1, "no tags while disabled");
    check(level == DEPTH - 1, $sformatf("buffer full, level %0d", level));
    check(overflow, "overflow set when more tags than space");
    foreach (exp_tags[i]) begin
      check(rd_data == exp_tags[i], $sformatf("tag %0d: %0d exp %0d", i, rd_data, exp_tags[i]));
      rd_en = 1; @(negedge clk); rd_en = 0;
    end
    check(empty, "empty after read-out");
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
