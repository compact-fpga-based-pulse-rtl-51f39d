// tb_pulser_system: end-to-end test of the whole unit at its default sizes
// (16 DDS boards, 2048-event sequencer, 1024-word boards, 4096-tag buffer).
//
// The testbench acts as the host.  It loads setting words into every DDS
// board over the shared bus, loads a pulse sequence whose extra channels
// trigger the boards, starts it, feeds PMT pulses while it runs, and finally
// reads back time tags and gated counts.  Every board drives a DDS chip
// model.  It checks
//  * the TTL outputs against the event list at every main-clock cycle;
//  * board 0, stepped through amplitude-only, off, on, frequency, phase,
//    frequency-ramp, amplitude-ramp and combined changes: chip and DAC values
//    after each step and which chip was written;
//  * board 1, three successive 180-degree phase flips and their latency;
//  * boards 2-15, their first word;
//  * every PMT pulse's time tag, and the sum of the gated counts;
//  * that a bus clear resets every board.
// Each mechanism is counted and one that never happened is a failure.
module tb_pulser_system;
  import pulser_pkg::*;
  localparam int SEQ_DEPTH = 2048, TAG_DEPTH = 4096, DDS_DEPTH = 1024;
  localparam int END_TICK = 5000;

  logic clk_ok = 0, rst_ok = 1;
  logic [NUM_DDS-1:0] clk_dds = '0, rst_dds = '1;
  logic seq_wr_en = 0, seq_start = 0, seq_stop = 0, seq_running, seq_done;
  logic [$clog2(SEQ_DEPTH)-1:0] seq_wr_addr = '0;
  seq_event_t seq_wr_data = '0;
  logic [$clog2(SEQ_DEPTH+1)-1:0] seq_num_events = '0;
  logic pmt_in = 0, cnt_enable = 0, cnt_rd_en = 0, cnt_empty, cnt_overflow;
  logic [31:0] cnt_period = 32'd1000, cnt_rd_data;
  logic tag_enable = 1, tag_rd_en = 0, tag_empty, tag_overflow;
  logic [31:0] tag_rd_data;
  logic [$clog2(TAG_DEPTH+1)-1:0] tag_level;
  logic dds_in_valid = 0, dds_in_ready, dds_clr_req = 0, dds_bus_busy;
  logic [15:0] dds_in_data = '0;
  logic [3:0] dds_in_sel = '0;
  logic [NUM_TTL-1:0] ttl_out;
  logic [NUM_DDS-1:0][7:0] dds_addr;
  logic [NUM_DDS-1:0][15:0] dds_data;
  logic [NUM_DDS-1:0] dds_wr_n, dds_io_update, dac_clk, rf_on, amp_ramping, freq_ramping;
  logic [NUM_DDS-1:0][AMP_W-1:0] dac_data;
  logic [NUM_DDS-1:0][$clog2(DDS_DEPTH+1)-1:0] dds_num_words, dds_cur_index;
  int checks = 0, failures = 0;

  always #5 clk_ok = ~clk_ok;                       // 100 MHz
  for (genvar i = 0; i < NUM_DDS; i++) begin : g_clk
    initial begin
      #(i * 0.9);                                   // boards are not in phase
      forever #8 clk_dds[i] = ~clk_dds[i];          // 62.5 MHz
    end
  end

  pulser_system dut (.*);

  // chip models; their state is copied into plain arrays every half clock
  logic [AMP_W-1:0] dac_q[NUM_DDS];
  int n_dac[NUM_DDS];
  typedef struct {
    logic [63:0] f;
    logic [15:0] p;
    logic        oe;
    int          n_writes;
    int          n_updates;
  } chip_view_t;
  chip_view_t chip[NUM_DDS];
  for (genvar i = 0; i < NUM_DDS; i++) begin : g_dac
    ad9915_model u_chip (.addr(dds_addr[i]), .data(dds_data[i]), .wr_n(dds_wr_n[i]), .io_update(dds_io_update[i]));
    initial begin dac_q[i] = '0; n_dac[i] = 0; end
    always @(posedge dac_clk[i]) begin dac_q[i] = dac_data[i]; n_dac[i]++; end
    always @(clk_ok) begin
      chip[i].f = u_chip.freq(); chip[i].p = u_chip.phase(); chip[i].oe = u_chip.outen();
      chip[i].n_writes = u_chip.n_writes; chip[i].n_updates = u_chip.n_updates;
    end
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------- host helpers ----------------
  task automatic bus_word(input logic [3:0] sel, input logic [15:0] d);
    @(negedge clk_ok) dds_in_valid = 1; dds_in_data = d; dds_in_sel = sel;
    do @(posedge clk_ok); while (!dds_in_ready);
    @(negedge clk_ok) dds_in_valid = 0;
  endtask
  task automatic load_word(input int board, input dds_word_t w);
    for (int i = 0; i < 8; i++) bus_word(4'(board), w[16*i +: 16]);
  endtask
  function automatic dds_word_t mk(logic [63:0] f, logic [13:0] a, logic [15:0] ph,
                                   logic [15:0] fr = 0, logic [15:0] ar = 0);
    dds_word_t x;
    x = '0; x.freq = f; x.amp = a; x.phase = ph; x.freq_ramp = fr; x.amp_ramp = ar;
    return x;
  endfunction

  // sequence built from output toggles: time -> XOR mask
  logic [SEQ_OUT_W-1:0] toggles[int];
  task automatic pulse(input int bitn, input int t, input int width);
    logic [SEQ_OUT_W-1:0] m;
    m = '0; m[bitn] = 1'b1;
    toggles[t]         = (toggles.exists(t) ? toggles[t] : '0) ^ m;
    toggles[t + width] = (toggles.exists(t + width) ? toggles[t + width] : '0) ^ m;
  endtask
  seq_event_t ev[$];

  // ---------------- the words ----------------
  localparam logic [63:0] F0 = 64'h01F3_B64E_0000_0000;   // ~15.2 MHz
  localparam logic [63:0] F1 = 64'h0333_3333_3333_3333;   // 25 MHz
  dds_word_t w0[9], w1[4], wx[NUM_DDS];

  // ---------------- mechanism counters ----------------
  int n_amp_only = 0, n_onoff = 0, n_freq = 0, n_phase = 0, n_framp = 0, n_aramp = 0;
  int n_tags = 0, n_windows = 0, n_trig_boards = 0, n_clear = 0;
  always @(posedge freq_ramping[0]) n_framp++;
  always @(posedge amp_ramping[0]) n_aramp++;

  // board 0 step checker: 12 us after each step (steps are 16 us apart)
  initial begin
    int idx, wr0, dac0, upd0;
    logic oe0;
    logic [63:0] f0;
    logic [15:0] p0;
    forever begin
      @(dds_cur_index[0]);
      idx = int'(dds_cur_index[0]);
      if (idx == 0) continue;
      wr0 = chip[0].n_writes; dac0 = n_dac[0]; upd0 = chip[0].n_updates;
      oe0 = chip[0].oe; f0 = chip[0].f; p0 = chip[0].p;
      #12000;
      check(chip[0].f == w0[idx-1].freq, $sformatf("board 0 word %0d frequency", idx - 1));
      check(chip[0].p == w0[idx-1].phase, $sformatf("board 0 word %0d phase", idx - 1));
      check(dac_q[0] == w0[idx-1].amp, $sformatf("board 0 word %0d amplitude %0d", idx - 1, dac_q[0]));
      check(chip[0].oe == (w0[idx-1].amp != 0), $sformatf("board 0 word %0d on/off", idx - 1));
      if (idx > 1) begin
        if (n_dac[0] != dac0 && chip[0].n_writes == wr0) n_amp_only++;
        if (chip[0].oe != oe0) n_onoff++;
        if (chip[0].f != f0) n_freq++;
        if (chip[0].p != p0) n_phase++;
      end
      if (idx == 2) check(chip[0].n_writes == wr0, "amplitude-only step writes no DDS register");
      if (idx == 5) check(n_dac[0] == dac0, "frequency-only step writes no DAC code");
    end
  end

  // board 1: phase-flip latency, trigger edge to IO_UPDATE
  realtime t_trig1;
  real lat_phase[$];
  always @(posedge dut.trig[1]) t_trig1 = $realtime;
  always @(posedge dds_io_update[1]) if (dds_cur_index[1] > 1) lat_phase.push_back($realtime - t_trig1);

  // TTL output checker and PMT stimulus, on the main clock
  int cyc = 0;
  bit running_tb = 0;
  logic [SEQ_OUT_W-1:0] exp_state = '0;
  int unsigned exp_tags[$];
  int n_pmt_pulses = 0;
  always @(posedge clk_ok) cyc++;

  initial begin
    int k;
    // words
    w0[0] = mk(F0, 14'd8000, 16'h0000);
    w0[1] = mk(F0, 14'd12000, 16'h0000);
    w0[2] = mk(F0, 14'd0, 16'h0000);
    w0[3] = mk(F0, 14'd5000, 16'h0000);
    w0[4] = mk(F1, 14'd5000, 16'h0000);
    w0[5] = mk(F1, 14'd5000, 16'h8000);
    w0[6] = mk(F1 + (64'd61572 << 31) * 4, 14'd5000, 16'h8000, 16'd61572, 0);   // 7 MHz/ms
    w0[7] = mk(F1 + (64'd61572 << 31) * 4, 14'd4950, 16'h8000, 0, 16'd11455);   // 20 dB/ms
    w0[8] = mk(F0, 14'd9000, 16'h4000);
    w1[0] = mk(F1, 14'd10000, 16'h0000);
    w1[1] = mk(F1, 14'd10000, 16'h8000);
    w1[2] = mk(F1, 14'd10000, 16'h0000);
    w1[3] = mk(F1, 14'd10000, 16'h8000);
    for (int b = 2; b < NUM_DDS; b++) wx[b] = mk({$urandom, $urandom}, 14'($urandom_range(1, 16383)), 16'($urandom));

    repeat (5) @(posedge clk_ok);
    rst_ok = 0; rst_dds = '0;
    repeat (5) @(posedge clk_ok);

    // load the boards
    for (int i = 0; i < 9; i++) load_word(0, w0[i]);
    for (int i = 0; i < 4; i++) load_word(1, w1[i]);
    for (int b = 2; b < NUM_DDS; b++) load_word(b, wx[b]);
    wait (!dds_bus_busy);
    #200;
    check(dds_num_words[0] == 9 && dds_num_words[1] == 4, "boards 0 and 1 loaded");
    for (int b = 2; b < NUM_DDS; b++) check(dds_num_words[b] == 1, $sformatf("board %0d loaded", b));

    // the sequence
    toggles[0] = 48'h0000_0000_0001;                    // initial state
    pulse(5, 500, 1);                                   // shortest TTL pulse, 40 ns
    pulse(31, 2000, 1000);                              // 40 us pulse
    for (int b = 0; b < NUM_DDS; b++) pulse(NUM_TTL + b, 10 + 20 * b, 2);   // first word everywhere
    for (int s = 1; s < 9; s++) pulse(NUM_TTL + 0, 1000 + 400 * (s - 1), 2);
    for (int s = 1; s < 4; s++) pulse(NUM_TTL + 1, 1100 + 50 * (s - 1), 2);
    toggles[END_TICK] = (toggles.exists(END_TICK) ? toggles[END_TICK] : '0) ^ 48'h0000_0000_0001;
    begin
      logic [SEQ_OUT_W-1:0] st;
      st = '0;
      foreach (toggles[t]) begin
        st ^= toggles[t];
        ev.push_back('{time_ticks: 32'(t), state: st});
      end
    end
    foreach (ev[i]) begin
      @(negedge clk_ok) seq_wr_en = 1; seq_wr_addr = 11'(i); seq_wr_data = ev[i];
    end
    @(negedge clk_ok) seq_wr_en = 0; seq_num_events = 12'(ev.size());

    // run
    @(negedge clk_ok) seq_start = 1; cnt_enable = 1;
    @(negedge clk_ok) seq_start = 0;
    cyc = 0;                                     // clock edges since the start edge
    running_tb = 1;
    k = 0;
    while (cyc < (END_TICK + 2) * 4) begin
      exp_state = '0;
      while (k < ev.size() && (int'(ev[k].time_ticks) + 1) * 4 <= cyc) k++;
      if (k > 0) exp_state = ev[k-1].state;
      check(ttl_out == exp_state[NUM_TTL-1:0], $sformatf("TTL outputs at clock %0d", cyc));
      if (cyc < 19600 && $urandom_range(0, 49) == 0) begin
        pmt_in = 1; n_pmt_pulses++;
        exp_tags.push_back(cyc + 1);
      end else pmt_in = 0;
      @(negedge clk_ok);
      pmt_in = 0;
      @(negedge clk_ok);   // pulses are one clock wide, at least one clock apart
    end
    check(!seq_running, "sequence finished");
    repeat (500) @(negedge clk_ok);
    cnt_enable = 0;

    // boards
    check(dds_cur_index[0] == 9 && dds_cur_index[1] == 4, "boards 0 and 1 stepped through all words");
    for (int b = 0; b < NUM_DDS; b++) if (dds_cur_index[b] != 0) n_trig_boards++;
    for (int b = 2; b < NUM_DDS; b++) begin
      check(chip[b].f == wx[b].freq && chip[b].p == wx[b].phase && dac_q[b] == wx[b].amp && chip[b].oe,
            $sformatf("board %0d first word", b));
    end
    check(chip[1].p == 16'h8000, "board 1 after three flips");
    check(lat_phase.size() == 3, $sformatf("three phase updates on board 1, saw %0d", lat_phase.size()));
    foreach (lat_phase[i]) check(lat_phase[i] >= 207.9 && lat_phase[i] <= 224.1,
                                 $sformatf("phase flip latency %0.1f ns", lat_phase[i]));

    // tags
    check(int'(tag_level) == exp_tags.size(), $sformatf("%0d tags, expected %0d", tag_level, exp_tags.size()));
    foreach (exp_tags[i]) begin
      check(!tag_empty && tag_rd_data == exp_tags[i], $sformatf("tag %0d: %0d exp %0d", i, tag_rd_data, exp_tags[i]));
      n_tags++;
      @(negedge clk_ok) tag_rd_en = 1; @(negedge clk_ok) tag_rd_en = 0;
    end
    // counts
    begin
      int sum;
      sum = 0;
      while (!cnt_empty) begin
        sum += cnt_rd_data; n_windows++;
        @(negedge clk_ok) cnt_rd_en = 1; @(negedge clk_ok) cnt_rd_en = 0;
      end
      check(sum == n_pmt_pulses, $sformatf("gated counts sum %0d, pulses %0d", sum, n_pmt_pulses));
    end

    // clear
    @(negedge clk_ok) dds_clr_req = 1; @(negedge clk_ok) dds_clr_req = 0;
    wait (!dds_bus_busy);
    #200;
    begin
      bit all0;
      all0 = 1;
      for (int b = 0; b < NUM_DDS; b++) if (dds_num_words[b] != 0 || dds_cur_index[b] != 0) all0 = 0;
      check(all0, "bus clear resets every board");
      if (all0) n_clear++;
    end

    $display("mechanisms: amp_only=%0d on_off=%0d freq=%0d phase=%0d freq_ramp=%0d amp_ramp=%0d tags=%0d count_windows=%0d boards_triggered=%0d clear=%0d",
             n_amp_only, n_onoff, n_freq, n_phase, n_framp, n_aramp, n_tags, n_windows, n_trig_boards, n_clear);
    foreach (lat_phase[i]) $display("phase flip %0d: trigger to IO_UPDATE %0.1f ns", i, lat_phase[i]);
    check(n_amp_only > 0, "amplitude-only switch happened");
    check(n_onoff >= 2, "output off and on happened");
    check(n_freq > 0, "frequency switch happened");
    check(n_phase > 0, "phase switch happened");
    check(n_framp > 0, "frequency ramp happened");
    check(n_aramp > 0, "amplitude ramp happened");
    check(n_tags > 0, "time tags taken");
    check(n_windows > 0, "count windows taken");
    check(n_trig_boards == NUM_DDS, "every board triggered");
    check(n_clear == 1, "clear happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk_ok);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
