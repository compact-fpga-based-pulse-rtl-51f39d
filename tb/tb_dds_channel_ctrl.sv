// tb_dds_channel_ctrl: the step-and-update logic against a memory model and
// the DDS chip model.  A list of words exercises each case of the update
// protocol, and for each step the testbench checks what reached the chips
// and when:
//  * amplitude-only change: one DAC write, no DDS write, DAC clock at a
//    fixed 5 clocks after the trigger;
//  * switching to and from amplitude 0 ("off"): DAC write plus one DDS
//    output on/off write;
//  * frequency change: one 4-half-word DDS write, IO_UPDATE at a fixed
//    4 + 4*WR_CYCLES + 1 clocks after the trigger;
//  * phase change: one 1-half-word DDS write;
//  * frequency and amplitude ramps: the expected number of writes and the
//    exact final values;
//  * a trigger after the last word is ignored; a clear restarts at word 0.
module tb_dds_channel_ctrl;
  import pulser_pkg::*;
  localparam int DEPTH = 16, P = 64, WR = 6, UPD = 4;
  logic clk = 0, rst = 1, clr = 0, trig_rise = 0;
  logic [$clog2(DEPTH+1)-1:0] num_words = '0, cur_index;
  logic [$clog2(DEPTH)-1:0] mem_raddr;
  logic [WORD_W-1:0] mem_rdata;
  logic [7:0] dds_addr;
  logic [15:0] dds_data;
  logic dds_wr_n, dds_io_update, dac_clk, rf_on, amp_ramping, freq_ramping;
  logic [AMP_W-1:0] dac_data;
  int checks = 0, failures = 0;
  always #8 clk = ~clk;

  dds_word_t mem[DEPTH];
  always_ff @(posedge clk) mem_rdata <= mem[mem_raddr];

  dds_channel_ctrl #(.DEPTH(DEPTH), .PERIOD_CYCLES(P), .WR_CYCLES(WR), .UPD_CYCLES(UPD)) dut (.*);
  ad9915_model chip (.addr(dds_addr), .data(dds_data), .wr_n(dds_wr_n), .io_update(dds_io_update));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // chip-side event log, in clocks since the trigger edge
  int cyc, n_dac, t_dac, n_upd, t_upd, n_wr;
  logic [AMP_W-1:0] dac_q = '0;
  always @(posedge dac_clk) begin n_dac++; if (t_dac < 0) t_dac = cyc; dac_q = dac_data; end
  always @(posedge dds_io_update) begin n_upd++; if (t_upd < 0) t_upd = cyc; end
  always @(posedge dds_wr_n) n_wr++;
  always @(posedge clk) cyc++;

  task automatic step_and_wait(input int wait_clocks);
    @(negedge clk) trig_rise = 1;
    n_dac = 0; n_upd = 0; n_wr = 0; t_dac = -1; t_upd = -1; cyc = -1;
    @(negedge clk) trig_rise = 0;
    repeat (wait_clocks) @(negedge clk);
  endtask

  function automatic dds_word_t mk(logic [63:0] f, logic [13:0] a, logic [15:0] ph,
                                   logic [15:0] fr = 0, logic [15:0] ar = 0);
    dds_word_t x;
    x = '0; x.freq = f; x.amp = a; x.phase = ph; x.freq_ramp = fr; x.amp_ramp = ar;
    return x;
  endfunction

  localparam logic [63:0] F0 = 64'h0000_0001_F3B6_4E0E, F1 = 64'h0123_4567_0000_0001;
  localparam int LAT_DAC = 5;                    // trigger edge -> DAC clock edge
  localparam int LAT_F   = 4 + 4 * WR + 1;       // trigger edge -> IO_UPDATE, 4 half-words
  localparam int LAT_1   = 4 + 1 * WR + 1;       // trigger edge -> IO_UPDATE, 1 half-word

  int n_amp_only = 0, n_onoff = 0, n_freq = 0, n_phase = 0, n_framp = 0, n_aramp = 0;

  initial begin
    mem[0] = mk(F0, 14'd8000, 16'h0000);                       // first word: everything
    mem[1] = mk(F0, 14'd12000, 16'h0000);                      // amplitude only
    mem[2] = mk(F0, 14'd0, 16'h0000);                          // to off
    mem[3] = mk(F0, 14'd5000, 16'h0000);                       // from off
    mem[4] = mk(F1, 14'd5000, 16'h0000);                       // frequency only
    mem[5] = mk(F1, 14'd5000, 16'h8000);                       // phase flip by 180 degrees
    mem[6] = mk(F1 + (64'd300 << 31) * 5, 14'd5000, 16'h8000, 16'd300, 0);    // frequency ramp, 5 periods
    mem[7] = mk(F1 + (64'd300 << 31) * 5, 14'd5000 - 14'd40, 16'h8000, 0, 16'd8192); // amp ramp, 5 periods
    mem[8] = mk(F1, 14'd9000, 16'h0000);                       // amp + freq + phase at once
    for (int i = 9; i < DEPTH; i++) mem[i] = '0;
    repeat (3) @(posedge clk);
    rst = 0;
    num_words = 9;
    // word 0
    step_and_wait(60);
    check(cur_index == 1, "advanced to word 0");
    check(dac_q == 14'd8000 && n_dac == 1, "word 0: DAC");
    check(chip.outen() == 1 && rf_on, "word 0: output on");
    check(chip.phase() == 16'h0000 && chip.freq() == F0, "word 0: phase and frequency");
    // word 1: amplitude only
    step_and_wait(60);
    check(n_dac == 1 && dac_q == 14'd12000, "amp only: DAC written");
    check(n_wr == 0 && n_upd == 0, "amp only: no DDS write");
    check(t_dac == LAT_DAC, $sformatf("amp only: DAC at %0d exp %0d", t_dac, LAT_DAC));
    if (n_dac == 1 && n_wr == 0) n_amp_only++;
    // word 2: off
    step_and_wait(60);
    check(n_dac == 1 && dac_q == 0, "off: DAC 0");
    check(n_wr == 1 && n_upd == 1 && chip.outen() == 0 && !rf_on, "off: one DDS on/off write");
    check(t_upd == LAT_1, $sformatf("off: IO_UPDATE at %0d exp %0d", t_upd, LAT_1));
    if (n_wr == 1) n_onoff++;
    // word 3: on
    step_and_wait(60);
    check(n_dac == 1 && dac_q == 14'd5000, "on: DAC");
    check(n_wr == 1 && chip.outen() == 1, "on: one DDS on/off write");
    check(t_dac == LAT_DAC && t_upd == LAT_1, "on: DAC and DDS latencies");
    if (n_wr == 1) n_onoff++;
    // word 4: frequency
    step_and_wait(60);
    check(n_dac == 0, "freq: no DAC write");
    check(n_wr == 4 && n_upd == 1 && chip.freq() == F1, "freq: 4 half-words");
    check(t_upd == LAT_F, $sformatf("freq: IO_UPDATE at %0d exp %0d", t_upd, LAT_F));
    if (n_wr == 4) n_freq++;
    // word 5: phase
    step_and_wait(60);
    check(n_wr == 1 && n_upd == 1 && chip.phase() == 16'h8000 && n_dac == 0, "phase: one half-word");
    check(t_upd == LAT_1, "phase latency");
    if (n_wr == 1) n_phase++;
    // word 6: frequency ramp over 5 periods
    step_and_wait(6 * P + 40);
    check(n_upd == 5 && n_wr == 20, $sformatf("freq ramp: %0d updates", n_upd));
    check(chip.freq() == F1 + (64'd300 << 31) * 5 && !freq_ramping, "freq ramp: final value");
    if (n_upd == 5) n_framp++;
    // word 7: amplitude ramp by 40 LSB at 8 LSB per period
    step_and_wait(6 * P + 40);
    check(n_dac == 5 && dac_q == 14'd4960 && !amp_ramping, $sformatf("amp ramp: %0d DAC writes", n_dac));
    check(n_wr == 0, "amp ramp: no DDS write");
    if (n_dac == 5) n_aramp++;
    // word 8: amplitude, frequency and phase together
    step_and_wait(80);
    check(t_dac == LAT_DAC, "combined: amplitude as fast as alone");
    check(chip.freq() == F1 && chip.phase() == 16'h0000 && dac_q == 14'd9000, "combined: values");
    check(n_wr == 5 && n_upd == 2, "combined: phase then frequency");
    // beyond the last word
    step_and_wait(40);
    check(cur_index == 9 && n_dac == 0 && n_wr == 0, "trigger past the end ignored");
    // clear restarts
    @(negedge clk) clr = 1; @(negedge clk) clr = 0;
    check(cur_index == 0, "clear");
    step_and_wait(60);
    check(cur_index == 1 && dac_q == 14'd8000 && chip.freq() == F0, "word 0 again after clear");
    check(n_amp_only > 0 && n_onoff == 2 && n_freq > 0 && n_phase > 0 && n_framp > 0 && n_aramp > 0,
          "every update case happened");
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
