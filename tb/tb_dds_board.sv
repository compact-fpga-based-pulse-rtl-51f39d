// tb_dds_board: one DDS board driven through its pins only.  The testbench
// loads words over the shared bus (some for another board), then pulses the
// trigger pin asynchronously and checks, through the DDS chip model and the
// DAC pins, that each word is applied in turn: frequency, phase, on/off and
// amplitude; that words for other boards are ignored; and that a clear on the
// bus restarts from word 0.
module tb_dds_board;
  import pulser_pkg::*;
  localparam int DEPTH = 32, ID = 3;
  logic clk = 0, rst = 1, trig_in = 0;
  dds_bus_t bus = '0;
  logic [7:0] dds_addr;
  logic [15:0] dds_data;
  logic dds_wr_n, dds_io_update, dac_clk, rf_on, amp_ramping, freq_ramping;
  logic [AMP_W-1:0] dac_data;
  logic [$clog2(DEPTH+1)-1:0] num_words, cur_index;
  int checks = 0, failures = 0;
  always #8 clk = ~clk;

  dds_board #(.BOARD_ID(ID), .DEPTH(DEPTH), .PERIOD_CYCLES(32)) dut (.*);
  ad9915_model chip (.addr(dds_addr), .data(dds_data), .wr_n(dds_wr_n), .io_update(dds_io_update));

  logic [AMP_W-1:0] dac_q = '0;
  always @(posedge dac_clk) dac_q = dac_data;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic send_word(input logic [3:0] sel, input dds_word_t w);
    for (int i = 0; i < 8; i++) begin
      bus.data = w[16*i +: 16]; bus.sel = sel; bus.wr = 1; #80;
      bus.wr = 0; #80;
    end
  endtask
  task automatic trigger();
    #37 trig_in = 1; #120 trig_in = 0; #1500;
  endtask

  dds_word_t w[4];
  initial begin
    repeat (3) @(posedge clk);
    rst = 0;
    for (int i = 0; i < 4; i++) begin
      w[i] = '0;
      w[i].freq  = {$urandom, $urandom};
      w[i].amp   = (i == 2) ? 14'd0 : 14'($urandom_range(1, 16383));
      w[i].phase = 16'($urandom);
      send_word(4'(ID), w[i]);
      send_word(4'(ID ^ 1), ~w[i]);       // for another board
    end
    #200 check(num_words == 4, $sformatf("4 words loaded, got %0d", num_words));
    for (int i = 0; i < 4; i++) begin
      trigger();
      check(cur_index == 5'(i + 1), "stepped");
      check(chip.freq() == w[i].freq, $sformatf("word %0d frequency", i));
      check(chip.phase() == w[i].phase, $sformatf("word %0d phase", i));
      check(dac_q == w[i].amp, $sformatf("word %0d amplitude", i));
      check(chip.outen() == (w[i].amp != 0) && rf_on == (w[i].amp != 0), $sformatf("word %0d on/off", i));
    end
    bus.clr = 1; #80 bus.clr = 0; #80;
    check(num_words == 0 && cur_index == 0, "clear");
    send_word(4'(ID), w[1]);
    trigger();
    check(chip.freq() == w[1].freq && dac_q == w[1].amp, "reloaded word applied");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
