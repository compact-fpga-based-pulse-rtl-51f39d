// tb_pulse_sequencer: loads a random sorted event list, runs it, and checks
// that each event's state appears on the outputs exactly at
// (time + 1) * TICK_CYCLES clocks after start (40 ns per tick at 100 MHz),
// that outputs hold between events, and that `done` comes after the last one.
// Also runs an empty sequence and an aborted one.
module tb_pulse_sequencer;
  import pulser_pkg::*;
  localparam int DEPTH = 64, TICK = 4, NOUT = SEQ_OUT_W, TW = SEQ_TIME_W;
  logic clk = 0, rst = 1;
  logic wr_en = 0, start = 0, stop = 0;
  logic [$clog2(DEPTH)-1:0] wr_addr = '0;
  logic [TW+NOUT-1:0] wr_data = '0;
  logic [$clog2(DEPTH+1)-1:0] num_events = '0;
  logic [NOUT-1:0] out_state;
  logic running, seq_start, done;
  logic [TW-1:0] time_ticks;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  pulse_sequencer #(.DEPTH(DEPTH), .TICK_CYCLES(TICK)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int unsigned ev_t[DEPTH];
  logic [NOUT-1:0] ev_s[DEPTH];

  initial begin
    int n, t, cyc;
    logic [NOUT-1:0] expv;
    repeat (3) @(posedge clk);
    rst = 0;
    n = 40; t = 0;
    for (int i = 0; i < n; i++) begin
      ev_t[i] = t;
      ev_s[i] = {$urandom, $urandom};
      t += 1 + (i % 5 == 0 ? $urandom_range(0, 20) : 0);  // includes back-to-back ticks
      @(negedge clk); wr_en = 1; wr_addr = i[5:0]; wr_data = {TW'(ev_t[i]), ev_s[i]};
    end
    @(negedge clk); wr_en = 0; num_events = 7'(n);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    // the start edge was at the posedge just before; count clocks from it
    cyc = 0;
    expv = '0;
    while (cyc < (ev_t[n-1] + 3) * TICK) begin
      int k;
      k = -1;
      for (int i = 0; i < n; i++) if ((ev_t[i] + 1) * TICK <= cyc) k = i;
      expv = (k >= 0) ? ev_s[k] : '0;
      check(out_state == expv, $sformatf("cycle %0d: out %h exp %h", cyc, out_state, expv));
      @(negedge clk); cyc++;
    end
    check(!running, "stopped after last event");
    // empty sequence ends at once
    num_events = '0;
    start = 1; @(posedge clk); #1 start = 0;
    check(done && !running, "empty sequence done at once");
    // abort
    num_events = 7'(n);
    @(negedge clk) start = 1; @(negedge clk) start = 0;
    repeat (20) @(negedge clk);
    check(running, "running again");
    stop = 1; @(negedge clk) stop = 0;
    check(!running, "stop aborts");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n_done = 0;
  always @(posedge clk) if (done) n_done++;
  final if (n_done < 2) $display("note: done pulses %0d", n_done);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
