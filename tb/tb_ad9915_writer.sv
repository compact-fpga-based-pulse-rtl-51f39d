// tb_ad9915_writer: issues random 1- to 4-half-word commands and checks,
// through the chip model, the half-words written at each address, that
// IO_UPDATE follows the writes, the number of write strobes, and that `done`
// rises exactly nwords*WR_CYCLES + UPD_CYCLES + 1 clocks after the start.
module tb_ad9915_writer;
  localparam int WR = 6, UPD = 4;
  logic clk = 0, rst = 1, start = 0, busy, done, dds_wr_n, dds_io_update;
  logic [7:0] base_addr = '0, dds_addr;
  logic [2:0] nwords = '0;
  logic [63:0] data = '0;
  logic [15:0] dds_data;
  int checks = 0, failures = 0;
  always #8 clk = ~clk;

  ad9915_writer #(.WR_CYCLES(WR), .UPD_CYCLES(UPD)) dut (.*);
  ad9915_model chip (.addr(dds_addr), .data(dds_data), .wr_n(dds_wr_n), .io_update(dds_io_update));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    int lat, w0, u0;
    repeat (3) @(posedge clk);
    rst = 0;
    for (int i = 0; i < 20; i++) begin
      @(negedge clk);
      nwords = 3'($urandom_range(1, 4)); base_addr = {2'($urandom_range(0, 3)), 6'd0} + 8'h10;
      data = {$urandom, $urandom};
      w0 = chip.n_writes; u0 = chip.n_updates;
      start = 1; @(negedge clk); start = 0;
      lat = 0;
      while (!done) begin @(negedge clk); lat++; end
      check(lat == nwords * WR + UPD + 1, $sformatf("latency %0d exp %0d", lat, nwords * WR + UPD + 1));
      check(chip.n_writes - w0 == nwords && chip.n_updates - u0 == 1, "strobe counts");
      for (int k = 0; k < nwords; k++)
        check(chip.act[(base_addr >> 1) + k] == data[16*k +: 16], $sformatf("half-word %0d", k));
      check(!busy, "idle after done");
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
