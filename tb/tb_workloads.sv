// tb_workloads: the published demonstrations, run on one DDS board at its
// default sizes (62.5 MHz clock, 2.048 us ramp period), driven through its
// pins: the bus loads the words and trigger pulses step through them.
//  1. amplitude and frequency switched together; amplitude switched on from
//     a low level and from off (three switching traces);
//  2. frequency alternating between two values on consecutive triggers
//     1.0 us apart, each applied within 1.0 us;
//  3. three successive 180-degree phase flips;
//  4. amplitude ramp down at 20 dB/ms, then output off;
//  5. frequency ramp at 7 MHz/ms;
//  6. frequency offsets of 0, 50, 10 and 0 uHz from 15.22535454300 MHz.
// Times are measured at the chip pins; the DDS chip's own pipeline delay and
// the amplifier response, which the published times include, are not
// modelled.
module tb_workloads;
  import pulser_pkg::*;
  localparam real TCLK = 16.0;                 // ns
  localparam real LSB_HZ = 2.0e9 / (2.0 ** 64);
  logic clk = 0, rst = 1, trig_in = 0;
  dds_bus_t bus = '0;
  logic [7:0] dds_addr;
  logic [15:0] dds_data;
  logic dds_wr_n, dds_io_update, dac_clk, rf_on, amp_ramping, freq_ramping;
  logic [AMP_W-1:0] dac_data;
  logic [10:0] num_words, cur_index;
  int checks = 0, failures = 0;
  always #8 clk = ~clk;

  dds_board dut (.*);
  ad9915_model chip (.addr(dds_addr), .data(dds_data), .wr_n(dds_wr_n), .io_update(dds_io_update));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // chip-pin timing relative to the latest trigger edge
  realtime t_trig, t_dac, t_upd;
  logic [AMP_W-1:0] dac_q = '0;
  always @(posedge trig_in) t_trig = $realtime;
  always @(posedge dac_clk) begin dac_q = dac_data; t_dac = $realtime - t_trig; end
  always @(posedge dds_io_update) t_upd = $realtime - t_trig;

  task automatic send_word(input dds_word_t w);
    for (int i = 0; i < 8; i++) begin
      bus.data = w[16*i +: 16]; bus.sel = 4'd0; bus.wr = 1; #80;
      bus.wr = 0; #80;
    end
  endtask
  task automatic trigger(input realtime after);
    trig_in = 1; #80 trig_in = 0; #(after - 80);
  endtask
  function automatic dds_word_t mk(logic [63:0] f, logic [13:0] a, logic [15:0] ph,
                                   logic [15:0] fr = 0, logic [15:0] ar = 0);
    dds_word_t x;
    x = '0; x.freq = f; x.amp = a; x.phase = ph; x.freq_ramp = fr; x.amp_ramp = ar;
    return x;
  endfunction
  function automatic logic [63:0] hz(real f);
    return 64'(f / LSB_HZ);
  endfunction

  dds_word_t w[$];
  int n_wl = 0;

  initial begin
    logic [63:0] fbase;
    real ffine[4];
    // 1: switching
    w.push_back(mk(hz(20.0e6), 14'd0, 0));             // 0: off
    w.push_back(mk(hz(80.0e6), 14'd16000, 0));         // 1: from off, new frequency (A)
    w.push_back(mk(hz(80.0e6), 14'd1000, 0));          // 2: low
    w.push_back(mk(hz(80.0e6), 14'd16000, 0));         // 3: low -> high (B)
    w.push_back(mk(hz(80.0e6), 14'd0, 0));             // 4: off
    w.push_back(mk(hz(80.0e6), 14'd16000, 0));         // 5: off -> high (C)
    // 2: alternating frequencies
    for (int i = 0; i < 6; i++) w.push_back(mk(i % 2 ? hz(70.0e6) : hz(90.0e6), 14'd16000, 0));  // 6..11
    // 3: phase flips
    for (int i = 0; i < 3; i++) w.push_back(mk(hz(70.0e6), 14'd16000, i % 2 ? 16'h0000 : 16'h8000)); // 12..14
    // 4: amplitude ramp 20 dB/ms down by 8 dB, then to off
    w.push_back(mk(hz(70.0e6), 14'd16000 - 14'd2185, 16'h8000, 0, 16'd11455));   // 15
    // 5: frequency ramp 7 MHz/ms up by 0.5 MHz
    w.push_back(mk(hz(70.5e6), 14'd13815, 16'h8000, 16'd61572, 0));               // 16
    // 6: fine tuning
    fbase = hz(15.22535454300e6);
    ffine = '{0.0, 50.0e-6, 10.0e-6, 0.0};
    for (int i = 0; i < 4; i++) w.push_back(mk(fbase + 64'(ffine[i] / LSB_HZ + 0.5), 14'd13815, 16'h8000)); // 17..20

    repeat (3) @(posedge clk);
    rst = 0;
    foreach (w[i]) send_word(w[i]);
    #200 check(int'(num_words) == w.size(), "all words loaded");

    // ---- 1: switching
    trigger(3000);
    check(!rf_on && chip.freq() == w[0].freq, "start: off");
    trigger(3000);                                            // A
    check(t_dac < 350.0 && t_upd < 1000.0, $sformatf("A: amplitude at %0.0f ns, frequency at %0.0f ns", t_dac, t_upd));
    check(chip.freq() == w[1].freq && rf_on && dac_q == 14'd16000, "A: values");
    trigger(3000);
    t_upd = -1.0;
    trigger(3000);                                            // B
    check(t_dac < 350.0 && t_upd < 0.0, $sformatf("B: DAC only, at %0.0f ns", t_dac));
    trigger(3000);
    begin
      realtime tb_dac;
      tb_dac = t_dac;
      trigger(3000);                                          // C
      check(rf_on && chip.outen() && t_dac < 350.0 && t_upd < 550.0,
            $sformatf("C: DAC at %0.0f ns and DDS on at %0.0f ns", t_dac, t_upd));
      check(t_upd > t_dac, "C: takes longer than B");
    end
    n_wl++;
    // ---- 2: alternating frequencies, triggers 1.0 us apart
    for (int i = 6; i < 12; i++) begin
      trigger(1000);
      check(chip.freq() == w[i].freq, $sformatf("alternation %0d applied within 1.0 us", i - 6));
    end
    n_wl++;
    // ---- 3: phase flips, 2 us apart
    for (int i = 12; i < 15; i++) begin
      trigger(2000);
      check(chip.phase() == w[i].phase && t_upd < 500.0, $sformatf("phase flip %0d at %0.0f ns", i - 12, t_upd));
    end
    n_wl++;
    // ---- 4: amplitude ramp 20 dB/ms over 8 dB = 400 us
    begin
      realtime t0;
      logic [AMP_W-1:0] a0;
      trigger(100);
      a0 = dac_q; t0 = $realtime;
      #200000;
      check(amp_ramping, "amplitude ramping");
      check((real'(16000) - real'(dac_q)) * (60.0 / 16384.0) / (($realtime - t0) * 1.0e-6) > 19.0 &&
            (real'(16000) - real'(dac_q)) * (60.0 / 16384.0) / (($realtime - t0) * 1.0e-6) < 21.0,
            $sformatf("20 dB/ms: DAC at %0d after 200 us", dac_q));
      #230000;
      check(!amp_ramping && dac_q == 14'd13815, "amplitude ramp ended on target");
    end
    n_wl++;
    // ---- 5: frequency ramp 7 MHz/ms over 0.5 MHz = 71 us
    begin
      logic [63:0] f0;
      trigger(100);
      f0 = chip.freq();
      #50000;
      check(freq_ramping && real'(chip.freq() - f0) * LSB_HZ / 50.0e-3 > 6.8e6 &&
            real'(chip.freq() - f0) * LSB_HZ / 50.0e-3 < 7.2e6,
            $sformatf("7 MHz/ms: %0.0f Hz in 50 us", real'(chip.freq() - f0) * LSB_HZ));
      #30000;
      check(!freq_ramping && chip.freq() == w[16].freq, "frequency ramp ended on target");
    end
    n_wl++;
    // ---- 6: sub-mHz steps
    begin
      logic [63:0] f[4];
      for (int i = 0; i < 4; i++) begin
        trigger(3000);
        f[i] = chip.freq();
      end
      check(real'(f[1] - f[0]) * LSB_HZ > 49.9999e-6 && real'(f[1] - f[0]) * LSB_HZ < 50.0001e-6, "+50 uHz");
      check(real'(f[2] - f[0]) * LSB_HZ > 9.9999e-6 && real'(f[2] - f[0]) * LSB_HZ < 10.0001e-6, "+10 uHz");
      check(f[3] == f[0], "back to 0 uHz");
      check(real'(f[0]) * LSB_HZ > 15.225354542e6 && real'(f[0]) * LSB_HZ < 15.225354544e6, "base frequency");
    end
    n_wl++;
    check(n_wl == 6, "all six demonstrations ran");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
