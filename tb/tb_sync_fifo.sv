// tb_sync_fifo: random pushes and pops against a queue reference model;
// checks order, fill level, full/empty and the overflow flag.
module tb_sync_fifo;
  localparam int W = 16, DEPTH = 8;
  logic clk = 0, rst = 1;
  logic wr_en = 0, rd_en = 0, empty, full, overflow;
  logic [W-1:0] wr_data = '0, rd_data;
  logic [$clog2(DEPTH+1)-1:0] level;
  int checks = 0, failures = 0;
  logic [W-1:0] q[$];
  always #5 clk = ~clk;

  sync_fifo #(.W(W), .DEPTH(DEPTH)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  bit exp_ovf = 0;
  initial begin
    repeat (3) @(posedge clk);
    rst = 0;
    for (int i = 0; i < 400; i++) begin
      @(negedge clk);
      check(level == q.size(), $sformatf("level %0d vs %0d", level, q.size()));
      check(empty == (q.size() == 0), "empty");
      check(full == (q.size() == DEPTH), "full");
      if (q.size() != 0) check(rd_data == q[0], $sformatf("head %h vs %h", rd_data, q[0]));
      wr_en   = ($urandom_range(0, 99) < (i < 200 ? 70 : 30));
      rd_en   = ($urandom_range(0, 99) < (i < 200 ? 30 : 70));
      wr_data = W'($urandom);
      @(posedge clk);
      begin
        bit popped, room;
        popped = rd_en && q.size() != 0;
        room   = q.size() < DEPTH || popped;
        if (popped) void'(q.pop_front());
        if (wr_en && room) q.push_back(wr_data);
        if (wr_en && !room) exp_ovf = 1;
      end
    end
    @(negedge clk);
    check(overflow == exp_ovf, "overflow flag");
    check(exp_ovf, "test reached overflow");
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
