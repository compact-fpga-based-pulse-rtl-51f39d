// ramp_counter: one of the two ramp counters of a DDS board (frequency and
// amplitude each have their own).
//
// The counter holds the present value in an accumulator with FRAC extra
// fraction bits.  `load` gives a new target and a 16-bit rate.  Rate 0 jumps
// to the target at once.  Any other rate moves the value towards the target
// by (rate << SHIFT) accumulator units every PERIOD_CYCLES clocks, starting
// from wherever the value is at the time of the load, and stops exactly on
// the target (no overshoot).  The update divider restarts at each load, so
// the first step lands PERIOD_CYCLES clocks after `load`, and a ramp over a
// distance D takes ceil(D / step) periods.
//
// Scaling at the defaults (62.5 MHz board clock, PERIOD_CYCLES = 128, one
// update every 2.048 us):
//   frequency: SHIFT = 31, FRAC = 0.  One rate unit is 2^31 tuning-word units
//     of 2 GHz / 2^64 each per 2.048 us = 113.7 Hz/ms; 16 bits give up to
//     7.45 MHz/ms.  This reproduces the published resolution and range.
//   amplitude: SHIFT = 0, FRAC = 10.  One amplitude LSB is 60 dB / 2^14 =
//     0.00366 dB, so one rate unit is 0.00366 / 1024 dB per 2.048 us =
//     0.0017 dB/ms, the published resolution; 16 bits give up to 114 dB/ms.
// The paper gives the existence of two independent counters with
// programmable rates and the resolutions; the accumulator scheme, period
// and clock are this design's choices that reproduce them.
module ramp_counter #(
  parameter int unsigned VAL_W         = 64,
  parameter int unsigned RATE_W        = 16,
  parameter int unsigned SHIFT         = 31,
  parameter int unsigned FRAC          = 0,
  parameter int unsigned PERIOD_CYCLES = 128
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              load,
  input  logic [VAL_W-1:0]  target,
  input  logic [RATE_W-1:0] rate,
  output logic [VAL_W-1:0]  value,
  output logic              ramping
);
  localparam int unsigned AW = VAL_W + FRAC;
  localparam int unsigned DW = $clog2(PERIOD_CYCLES);

  logic [AW-1:0]     acc, tgt, step;
  logic [DW-1:0]     div;
  logic              upd;
  logic [AW-1:0]     gap;
  logic              up;

  assign value = acc[AW-1:FRAC];
  assign upd   = ramping && (div == DW'(PERIOD_CYCLES - 1));
  assign up    = (tgt > acc);
  assign gap  = up ? (tgt - acc) : (acc - tgt);

  always_ff @(posedge clk) begin
    if (rst) begin
      acc     <= '0;
      tgt     <= '0;
      step    <= '0;
      div     <= '0;
      ramping <= 1'b0;
    end else if (load) begin
      tgt  <= (AW'(target) << FRAC);
      step <= AW'(rate) << SHIFT;
      div  <= '0;
      if (rate == '0) begin
        acc     <= (AW'(target) << FRAC);
        ramping <= 1'b0;
      end else begin
        ramping <= ((AW'(target) << FRAC) != acc);
      end
    end else if (ramping) begin
      div <= upd ? '0 : div + 1'b1;
      if (upd) begin
        if (gap <= step) begin
          acc     <= tgt;
          ramping <= 1'b0;
        end else begin
          acc <= up ? acc + step : acc - step;
        end
      end
    end
  end

  initial assert (SHIFT + RATE_W <= AW) else $error("ramp_counter: step does not fit");
endmodule
