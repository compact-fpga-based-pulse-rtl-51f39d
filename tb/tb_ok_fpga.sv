// tb_ok_fpga: the main FPGA through its host ports.  Loads a short event
// list, sends DDS bus words, and plays the sequence while PMT pulses arrive.
// Checks the TTL and trigger outputs at the 40 ns tick times, that every PMT
// pulse during the run gives a time tag equal to the number of clocks from
// the start command to the clock edge that first samples the pulse, that the gated counts
// add up to the pulses sent, and that bus words appear with their select.
module tb_ok_fpga;
  import pulser_pkg::*;
  localparam int SD = 64, TD = 256;
  logic clk = 0, rst = 1;
  logic seq_wr_en = 0, seq_start = 0, seq_stop = 0, seq_running, seq_done;
  logic [$clog2(SD)-1:0] seq_wr_addr = '0;
  seq_event_t seq_wr_data = '0;
  logic [$clog2(SD+1)-1:0] seq_num_events = '0;
  logic pmt_in = 0, cnt_enable = 0, cnt_rd_en = 0, cnt_empty, cnt_overflow;
  logic [31:0] cnt_period = 32'd100, cnt_rd_data;
  logic tag_enable = 1, tag_rd_en = 0, tag_empty, tag_overflow;
  logic [31:0] tag_rd_data;
  logic [$clog2(TD+1)-1:0] tag_level;
  logic dds_in_valid = 0, dds_in_ready, dds_clr_req = 0, dds_bus_busy;
  logic [15:0] dds_in_data = '0;
  logic [3:0] dds_in_sel = '0;
  logic [NUM_TTL-1:0] ttl_out;
  logic [NUM_DDS-1:0] dds_trig;
  dds_bus_t dds_bus;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  ok_fpga #(.SEQ_DEPTH(SD), .TAG_DEPTH(TD), .CNT_DEPTH(64)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // bus monitor
  logic [19:0] bus_seen[$];
  logic wr_d = 0;
  always @(posedge clk) begin
    if (dds_bus.wr && !wr_d) bus_seen.push_back({dds_bus.sel, dds_bus.data});
    wr_d = dds_bus.wr;
  end

  int cyc;   // clocks since the start edge
  always @(posedge clk) cyc++;

  int unsigned exp_tags[$];
  int n_pulses_gate = 0;
  initial begin
    seq_event_t ev[4];
    ev[0] = '{time_ticks: 0,  state: {16'h0000, 32'h0000_0001}};
    ev[1] = '{time_ticks: 5,  state: {16'h0001, 32'h8000_0003}};
    ev[2] = '{time_ticks: 6,  state: {16'h0000, 32'h8000_0002}};
    ev[3] = '{time_ticks: 40, state: {16'h0000, 32'h0000_0000}};
    repeat (3) @(posedge clk);
    rst = 0;
    for (int i = 0; i < 4; i++) begin
      @(negedge clk) seq_wr_en = 1; seq_wr_addr = 6'(i); seq_wr_data = ev[i];
    end
    @(negedge clk) seq_wr_en = 0; seq_num_events = 4;
    // bus words
    for (int i = 0; i < 3; i++) begin
      @(negedge clk) dds_in_valid = 1; dds_in_data = 16'h1000 + 16'(i); dds_in_sel = 4'(i + 7);
      do @(posedge clk); while (!dds_in_ready);
      @(negedge clk) dds_in_valid = 0;
    end
    wait (!dds_bus_busy);
    check(bus_seen.size() == 3, "3 bus words");
    foreach (bus_seen[i]) check(bus_seen[i] == {4'(i + 7), 16'h1000 + 16'(i)}, "bus word and select");
    // run
    @(negedge clk) seq_start = 1; cyc = -1;
    @(negedge clk) seq_start = 0;
    while (cyc < 44 * 4) begin
      logic [47:0] expv;
      expv = '0;
      for (int i = 0; i < 4; i++) if ((ev[i].time_ticks + 1) * 4 <= cyc) expv = ev[i].state;
      check({dds_trig, ttl_out} == expv, $sformatf("outputs at clock %0d", cyc));
      // one-clock PMT pulse; its tag is the clock at which it is first sampled
      if (cyc % 7 == 3) begin
        pmt_in = 1;
        // tagged only if stored while the run lasts (it ends at clock 41*4)
        if (cyc + 1 + 2 <= 41 * 4) exp_tags.push_back(cyc + 1);
      end else pmt_in = 0;
      @(negedge clk);
    end
    pmt_in = 0;
    check(!seq_running, "run ended");
    check(int'(tag_level) == exp_tags.size(), $sformatf("tags %0d exp %0d", tag_level, exp_tags.size()));
    foreach (exp_tags[i]) begin
      check(tag_rd_data == exp_tags[i], $sformatf("tag %0d = %0d exp %0d", i, tag_rd_data, exp_tags[i]));
      @(negedge clk) tag_rd_en = 1; @(negedge clk) tag_rd_en = 0;
    end
    // gated counter: 5 windows of 100 clocks, pulses every 4 clocks (2 high)
    @(negedge clk) cnt_enable = 1;
    for (int k = 0; k < 500; k++) begin
      pmt_in = (k % 4 < 2);
      @(negedge clk);
    end
    pmt_in = 0;
    repeat (6) @(negedge clk);
    cnt_enable = 0;
    for (int w = 0; w < 5; w++) begin
      check(!cnt_empty, "count present");
      n_pulses_gate += cnt_rd_data;
      check(cnt_rd_data >= 24 && cnt_rd_data <= 26, $sformatf("window %0d: %0d pulses", w, cnt_rd_data));
      @(negedge clk) cnt_rd_en = 1; @(negedge clk) cnt_rd_en = 0;
    end
    check(n_pulses_gate >= 124 && n_pulses_gate <= 125, $sformatf("total %0d of 125", n_pulses_gate));
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
