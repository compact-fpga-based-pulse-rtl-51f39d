// tb_dac_writer: sends random codes and checks that the DAC latches the
// right code on each rising edge of dac_clk, that busy lasts CLK_HIGH + 1
// clocks, and that an update while busy is not taken.
module tb_dac_writer;
  logic clk = 0, rst = 1, update = 0, busy, dac_clk;
  logic [13:0] code = '0, dac_data;
  int checks = 0, failures = 0;
  always #8 clk = ~clk;

  dac_writer #(.DAC_W(14), .CLK_HIGH(2)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [13:0] latched;
  int n_latch = 0;
  always @(posedge dac_clk) begin latched = dac_data; n_latch++; end

  initial begin
    int b;
    logic [13:0] c;
    repeat (3) @(posedge clk);
    rst = 0;
    for (int i = 0; i < 20; i++) begin
      @(negedge clk);
      c = 14'($urandom); code = c; update = 1;
      @(negedge clk); update = 1; code = ~c;   // must be ignored: busy
      @(negedge clk); update = 0;
      b = 2;
      while (busy) begin @(negedge clk); b++; end
      check(b == 4, $sformatf("busy span %0d", b));
      check(latched == c, $sformatf("latched %h exp %h", latched, c));
      check(n_latch == i + 1, "one latch per update");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
