// tb_dds_bus_receiver: a testbench-driven bus (asynchronous to the board
// clock) sends 128-bit words as eight half-words to this board and to other
// boards.  Checks that only this board's words are written, in order, at
// consecutive addresses, with the right packing, and that a clear restarts
// the load address.
module tb_dds_bus_receiver;
  import pulser_pkg::*;
  localparam int DEPTH = 16, ID = 5;
  logic clk = 0, rst = 1;
  dds_bus_t bus = '0;
  logic mem_we, clr_pulse;
  logic [$clog2(DEPTH)-1:0] mem_addr;
  logic [WORD_W-1:0] mem_wdata;
  logic [$clog2(DEPTH+1)-1:0] num_words;
  int checks = 0, failures = 0;
  always #8 clk = ~clk;   // 62.5 MHz board clock

  dds_bus_receiver #(.BOARD_ID(ID), .DEPTH(DEPTH)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic send_hw(input logic [3:0] sel, input logic [15:0] d);
    bus.data = d; bus.sel = sel; bus.wr = 1; #80;
    bus.wr = 0; #80;
  endtask
  task automatic send_word(input logic [3:0] sel, input logic [127:0] w);
    for (int i = 0; i < 8; i++) send_hw(sel, w[16*i +: 16]);
  endtask

  logic [127:0] exp_w[$];
  int exp_a[$];
  always @(posedge clk) if (mem_we) begin
    check(exp_w.size() != 0, "unexpected write");
    if (exp_w.size() != 0) begin
      check(mem_wdata == exp_w[0], $sformatf("word %h exp %h", mem_wdata, exp_w[0]));
      check(int'(mem_addr) == exp_a[0], $sformatf("addr %0d exp %0d", mem_addr, exp_a[0]));
      void'(exp_w.pop_front()); void'(exp_a.pop_front());
    end
  end

  initial begin
    logic [127:0] w;
    #3;
    repeat (3) @(posedge clk);
    rst = 0;
    #13;
    for (int i = 0; i < 6; i++) begin
      w = {$urandom, $urandom, $urandom, $urandom};
      if (i % 2 == 0) begin exp_w.push_back(w); exp_a.push_back(i / 2); send_word(4'(ID), w); end
      else send_word(4'(ID + 1), w);
    end
    #100 check(num_words == 3, $sformatf("num_words %0d", num_words));
    bus.clr = 1; #80 bus.clr = 0; #80;
    check(num_words == 0, "cleared");
    w = {$urandom, $urandom, $urandom, $urandom};
    exp_w.push_back(w); exp_a.push_back(0); send_word(4'(ID), w);
    #100 check(exp_w.size() == 0, "all expected words written");
    check(num_words == 1, "one word after clear");
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
