// tb_ramp_counter: two counters configured as on a DDS board (frequency:
// 64 bits, SHIFT 31; amplitude: 14 bits, 10 fraction bits), default update
// period of 128 clocks at 62.5 MHz.  Checks
//  * rate 0 jumps to the target one clock after load;
//  * a ramp changes the value exactly every 128 clocks by rate << SHIFT
//    (against a reference accumulator), up and down, and stops exactly on
//    the target;
//  * the physical rates of the paper's demonstrations: frequency rate 61572
//    gives 7.0 MHz/ms and amplitude rate 11455 gives 20 dB/ms, and one rate
//    unit is 113.7 Hz/ms and 0.0017 dB/ms.
module tb_ramp_counter;
  localparam int P = 128;
  localparam real TCLK_MS = 16.0e-6;     // 62.5 MHz
  logic clk = 0, rst = 1;
  logic fl = 0, al = 0, framp, aramp;
  logic [63:0] ft = '0, fv;
  logic [13:0] at = '0, av;
  logic [15:0] fr = '0, ar = '0;
  int checks = 0, failures = 0;
  always #8 clk = ~clk;

  ramp_counter #(.VAL_W(64), .SHIFT(31), .FRAC(0), .PERIOD_CYCLES(P)) u_f (
    .clk, .rst, .load(fl), .target(ft), .rate(fr), .value(fv), .ramping(framp));
  ramp_counter #(.VAL_W(14), .SHIFT(0), .FRAC(10), .PERIOD_CYCLES(P)) u_a (
    .clk, .rst, .load(al), .target(at), .rate(ar), .value(av), .ramping(aramp));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    logic [63:0] fref, f0;
    logic [23:0] aref;
    real hz_per_ms, db_per_ms;
    repeat (3) @(posedge clk);
    rst = 0;
    // jumps
    @(negedge clk) fl = 1; ft = 64'h0123_4567_89AB_CDEF; fr = 0; al = 1; at = 14'd9000; ar = 0;
    @(negedge clk) fl = 0; al = 0;
    check(fv == 64'h0123_4567_89AB_CDEF && !framp, "frequency jump");
    check(av == 14'd9000 && !aramp, "amplitude jump");
    // frequency ramp up at 7 MHz/ms, for 6 periods, cycle-exact
    f0 = fv;
    @(negedge clk) fl = 1; ft = f0 + (64'd61572 << 31) * 6 + 64'd12345; fr = 16'd61572;
    @(negedge clk) fl = 0;
    fref = f0;
    for (int k = 0; k < 7 * P; k++) begin
      if (k > 0 && k % P == 0) fref = (k / P <= 6) ? fref + (64'd61572 << 31) : f0 + (64'd61572 << 31) * 6 + 64'd12345;
      check(fv == fref, $sformatf("freq at clock %0d", k));
      @(negedge clk);
    end
    check(!framp && fv == ft, "frequency ramp ends on target");
    hz_per_ms = real'(64'd61572 << 31) * 2.0e9 / (2.0 ** 64) / (P * TCLK_MS);
    check(hz_per_ms > 6.99e6 && hz_per_ms < 7.01e6, $sformatf("7 MHz/ms demo: %f", hz_per_ms));
    hz_per_ms = real'(64'd1 << 31) * 2.0e9 / (2.0 ** 64) / (P * TCLK_MS);
    check(hz_per_ms > 113.0 && hz_per_ms < 114.0, $sformatf("resolution %f Hz/ms", hz_per_ms));
    // amplitude ramp down at 20 dB/ms from 9000 to 0
    @(negedge clk) al = 1; at = 14'd0; ar = 16'd11455;
    @(negedge clk) al = 0;
    aref = 24'd9000 << 10;
    for (int k = 0; k <= 40 * P; k++) begin
      if (k > 0 && k % P == 0) aref = (aref > 24'd11455) ? aref - 24'd11455 : 24'd0;
      if (k % 61 == 0 || k % P == 0) check(av == aref[23:10], $sformatf("amp at clock %0d: %0d exp %0d", k, av, aref[23:10]));
      @(negedge clk);
    end
    // compare the measured slope with 20 dB/ms
    db_per_ms = (9000.0 - real'(av)) * (60.0 / 16384.0) / (40.0 * P * TCLK_MS);
    check(db_per_ms > 19.5 && db_per_ms < 20.5, $sformatf("20 dB/ms demo: measured %f", db_per_ms));
    db_per_ms = (60.0 / 16384.0) / 1024.0 / (P * TCLK_MS);
    check(db_per_ms > 0.0016 && db_per_ms < 0.0018, $sformatf("resolution %f dB/ms", db_per_ms));
    // retarget during a ramp: ramps back up from where it is
    begin
      @(negedge clk) al = 1; at = 14'd16000; ar = 16'hFFFF;
      @(negedge clk) al = 0;
      repeat (P) @(negedge clk);
      check(av == 14'((aref + 24'hFFFF) >> 10), "retarget continues from present value");
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
