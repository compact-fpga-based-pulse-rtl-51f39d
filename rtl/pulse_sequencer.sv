// pulse_sequencer: the TTL pulse generator of the main FPGA.
//
// A sequence is stored as a list of events sorted by time.  Each event says
// "at sequence time T (in 40 ns ticks) the outputs become S", so the memory
// needed grows with the number of edges, not with the sequence length.  The
// whole list is written by the host before the run (wr_en/wr_addr/wr_data);
// nothing is transferred while the sequence runs.  The first event, normally
// at time 0, sets the initial state of every channel.
//
// Timing: a tick divider turns the clock into a 40 ns time base
// (TICK_CYCLES = 4 at 100 MHz).  `start` clears the sequence time; on every
// tick the time counter is compared with the next event's time and, if equal,
// that event's state is driven onto `out_state` (registered) and the next
// event is fetched from the synchronous memory, which takes two clocks and is
// hidden inside the tick (hence TICK_CYCLES >= 3).  An event at time T
// appears on the outputs T*TICK_CYCLES + TICK_CYCLES clocks after `start`.
// After the last event (num_events) the run ends with a `done` pulse and the
// outputs keep their last state.  Events whose time is not larger than the
// previous one are never reached, so the host must sort them.
//
// The paper gives the function and the 40 ns resolution; the event format,
// the clock, the memory depth and the widths are this design's choices.
module pulse_sequencer
  import pulser_pkg::*;
#(
  parameter int unsigned NUM_OUT     = SEQ_OUT_W,
  parameter int unsigned TIME_W      = SEQ_TIME_W,
  parameter int unsigned DEPTH       = 2048,
  parameter int unsigned TICK_CYCLES = 4
) (
  input  logic                        clk,
  input  logic                        rst,
  input  logic                        wr_en,
  input  logic [$clog2(DEPTH)-1:0]    wr_addr,
  input  logic [TIME_W+NUM_OUT-1:0]   wr_data,
  input  logic [$clog2(DEPTH+1)-1:0]  num_events,
  input  logic                        start,
  input  logic                        stop,
  output logic [NUM_OUT-1:0]          out_state,
  output logic                        running,
  output logic                        seq_start,
  output logic                        done,
  output logic [TIME_W-1:0]           time_ticks
);
  localparam int unsigned AW = $clog2(DEPTH);
  localparam int unsigned NW = $clog2(DEPTH+1);
  localparam int unsigned DW = $clog2(TICK_CYCLES);

  logic [TIME_W+NUM_OUT-1:0] mem [DEPTH];
  logic [TIME_W+NUM_OUT-1:0] rd_q;
  logic [NW-1:0]             ptr;
  logic [DW-1:0]             div;
  logic                      tick;

  wire [TIME_W-1:0]  ev_time  = rd_q[TIME_W+NUM_OUT-1:NUM_OUT];
  wire [NUM_OUT-1:0] ev_state = rd_q[NUM_OUT-1:0];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    rd_q <= mem[ptr[AW-1:0]];
  end

  assign tick = running && (div == DW'(TICK_CYCLES-1));

  always_ff @(posedge clk) begin
    if (rst) begin
      running    <= 1'b0;
      ptr        <= '0;
      div        <= '0;
      time_ticks <= '0;
      out_state  <= '0;
      seq_start  <= 1'b0;
      done       <= 1'b0;
    end else begin
      seq_start <= 1'b0;
      done      <= 1'b0;
      if (start && !running) begin
        running    <= (num_events != 0);
        done       <= (num_events == 0);
        seq_start  <= 1'b1;
        ptr        <= '0;
        div        <= '0;
        time_ticks <= '0;
      end else if (stop) begin
        running <= 1'b0;
      end else if (running) begin
        div <= tick ? '0 : div + 1'b1;
        if (tick) begin
          time_ticks <= time_ticks + 1'b1;
          if (ev_time == time_ticks) begin
            out_state <= ev_state;
            ptr       <= ptr + 1'b1;
            if (ptr + 1'b1 == num_events) begin
              running <= 1'b0;
              done    <= 1'b1;
            end
          end
        end
      end
    end
  end

  initial assert (TICK_CYCLES >= 3) else $error("pulse_sequencer: TICK_CYCLES must be >= 3");
  // The event list must not be rewritten while it is being played.
  assert property (@(posedge clk) disable iff (rst) !(wr_en && running));
endmodule
