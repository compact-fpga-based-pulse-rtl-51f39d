// tb_dds_word_ram: writes random 128-bit words to random addresses and reads
// them back, checking data and the one-clock read latency.
module tb_dds_word_ram;
  localparam int DEPTH = 32, W = 128;
  logic clk = 0, we = 0;
  logic [$clog2(DEPTH)-1:0] waddr = '0, raddr = '0;
  logic [W-1:0] wdata = '0, rdata;
  int checks = 0, failures = 0;
  logic [W-1:0] ref_m[DEPTH];
  always #5 clk = ~clk;

  dds_word_ram #(.W(W), .DEPTH(DEPTH)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); we = 1; waddr = 5'(a); wdata = {$urandom, $urandom, $urandom, $urandom}; ref_m[a] = wdata;
    end
    for (int i = 0; i < 100; i++) begin
      @(negedge clk);
      we = ($urandom_range(0, 1) == 1); waddr = 5'($urandom); wdata = {$urandom, $urandom, $urandom, $urandom};
      raddr = 5'($urandom);
      @(posedge clk);
      #1 check(rdata == ref_m[raddr], $sformatf("read %0d", raddr));
      if (we) ref_m[waddr] = wdata;
    end
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
