// dds_channel_ctrl: the step-and-update logic of one DDS board.
//
// Stepping.  Each rising edge of the (synchronised) trigger advances the
// board to the next word of its memory.  After a clear the board points
// before word 0, so the first trigger applies word 0.  A trigger that arrives
// while a step is in progress is remembered (one deep); triggers beyond the
// last loaded word are ignored.  A step reads the word (two clocks: address,
// then registered data) and in the third clock loads both ramp counters with
// the new amplitude and frequency and their ramp rates.
//
// Updating.  The chip-side work follows from the change only:
//  * amplitude: whenever the amplitude counter's value differs from what the
//    DAC holds and the DAC is free, the new code is sent to the DAC.  An
//    amplitude-only change therefore never touches the DDS chip;
//  * output on/off: amplitude 0 means "completely off".  When the counter
//    crosses to or from 0, the DDS output is switched with one extra DDS
//    write, in addition to the DAC write;
//  * phase: a changed phase word is written to the DDS chip;
//  * frequency: whenever the frequency counter's value differs from what was
//    last written, the 64-bit frequency is written (four half-words).
// DDS writes go one at a time, in the order on/off, phase, frequency, each
// closed by its own IO_UPDATE.  During a ramp the counters change value once
// per update period and each change is written out in the same way.
//
// Latency from the trigger (after synchronisation) to the start of the DAC or
// DDS write is a fixed number of clocks, so the host can compensate it by
// triggering early, as the paper describes.  The comparison against the
// previous word and the three cases (amplitude only, to/from off, frequency)
// follow the paper; the ordering, the one-deep trigger memory and the
// encoding of "off" as amplitude 0 are this design's choices.
module dds_channel_ctrl
  import pulser_pkg::*;
#(
  parameter int unsigned DEPTH         = 1024,
  parameter int unsigned PERIOD_CYCLES = 128,
  parameter int unsigned WR_CYCLES     = 6,
  parameter int unsigned UPD_CYCLES    = 4
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic                       clr,
  input  logic                       trig_rise,
  input  logic [$clog2(DEPTH+1)-1:0] num_words,
  output logic [$clog2(DEPTH)-1:0]   mem_raddr,
  input  logic [WORD_W-1:0]          mem_rdata,
  // AD9915 parallel port
  output logic [7:0]                 dds_addr,
  output logic [15:0]                dds_data,
  output logic                       dds_wr_n,
  output logic                       dds_io_update,
  // AD9744 DAC
  output logic [AMP_W-1:0]           dac_data,
  output logic                       dac_clk,
  // status
  output logic [$clog2(DEPTH+1)-1:0] cur_index,   // words applied since clear
  output logic                       rf_on,
  output logic                       amp_ramping,
  output logic                       freq_ramping
);
  localparam int unsigned AW = $clog2(DEPTH);

  typedef enum logic [1:0] {S_IDLE, S_READ, S_APPLY} step_t;

  step_t            st;
  logic             trig_pend;
  logic             have;
  dds_word_t        w;
  logic [PHASE_W-1:0] cur_phase;
  logic             load;
  logic             phase_pend;
  logic [PHASE_W-1:0] phase_val;

  logic [AMP_W-1:0]  a_value;
  logic [FREQ_W-1:0] f_value;
  logic [AMP_W-1:0]  dac_prog;
  logic [FREQ_W-1:0] freq_prog;
  logic              dac_busy, dac_upd;
  logic              wr_busy, wr_start;
  logic [7:0]        wr_base;
  logic [2:0]        wr_n;
  logic [63:0]       wr_data;
  logic              rf_want;

  assign w         = dds_word_t'(mem_rdata);
  assign mem_raddr = AW'(cur_index);
  assign load      = (st == S_APPLY);
  assign rf_want   = (a_value != '0);

  // ---------------- stepping ----------------
  always_ff @(posedge clk) begin
    if (rst || clr) begin
      st         <= S_IDLE;
      trig_pend  <= 1'b0;
      have       <= 1'b0;
      cur_phase  <= '0;
      cur_index  <= '0;
      phase_pend <= 1'b0;
      phase_val  <= '0;
    end else begin
      if (trig_rise) trig_pend <= 1'b1;
      if (wr_start && wr_base == DDS_ADDR_PHASE) phase_pend <= 1'b0;
      unique case (st)
        S_IDLE: if (trig_pend) begin
          trig_pend <= trig_rise;
          if (cur_index < num_words) st <= S_READ;
        end
        S_READ:  st <= S_APPLY;
        S_APPLY: begin
          if (!have || w.phase != cur_phase) begin
            phase_pend <= 1'b1;
            phase_val  <= w.phase;
          end
          cur_phase <= w.phase;
          have      <= 1'b1;
          cur_index <= cur_index + 1'b1;
          st        <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  // ---------------- ramp counters ----------------
  ramp_counter #(.VAL_W(FREQ_W), .RATE_W(RATE_W), .SHIFT(31), .FRAC(0),
                 .PERIOD_CYCLES(PERIOD_CYCLES)) u_framp (
    .clk, .rst, .load, .target(w.freq), .rate(w.freq_ramp),
    .value(f_value), .ramping(freq_ramping));

  ramp_counter #(.VAL_W(AMP_W), .RATE_W(RATE_W), .SHIFT(0), .FRAC(10),
                 .PERIOD_CYCLES(PERIOD_CYCLES)) u_aramp (
    .clk, .rst, .load, .target(w.amp), .rate(w.amp_ramp),
    .value(a_value), .ramping(amp_ramping));

  // ---------------- DAC path ----------------
  assign dac_upd = !dac_busy && (a_value != dac_prog);

  always_ff @(posedge clk) begin
    if (rst) dac_prog <= '0;
    else if (dac_upd) dac_prog <= a_value;
  end

  dac_writer #(.DAC_W(AMP_W)) u_dac (
    .clk, .rst, .update(dac_upd), .code(a_value),
    .busy(dac_busy), .dac_data, .dac_clk);

  // ---------------- DDS chip path ----------------
  always_comb begin
    wr_start = 1'b0;
    wr_base  = DDS_ADDR_FREQ;
    wr_n     = 3'd4;
    wr_data  = f_value;
    if (!wr_busy) begin
      if (rf_want != rf_on) begin
        wr_start = 1'b1;
        wr_base  = DDS_ADDR_OUTEN;
        wr_n     = 3'd1;
        wr_data  = {63'd0, rf_want};
      end else if (phase_pend) begin
        wr_start = 1'b1;
        wr_base  = DDS_ADDR_PHASE;
        wr_n     = 3'd1;
        wr_data  = {48'd0, phase_val};
      end else if (f_value != freq_prog) begin
        wr_start = 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      rf_on     <= 1'b0;
      freq_prog <= '0;
    end else if (wr_start) begin
      if (wr_base == DDS_ADDR_OUTEN) rf_on <= rf_want;
      if (wr_base == DDS_ADDR_FREQ)  freq_prog <= f_value;
    end
  end

  ad9915_writer #(.WR_CYCLES(WR_CYCLES), .UPD_CYCLES(UPD_CYCLES)) u_wr (
    .clk, .rst, .start(wr_start), .base_addr(wr_base), .nwords(wr_n), .data(wr_data),
    .busy(wr_busy), .done(), .dds_addr, .dds_data, .dds_wr_n, .dds_io_update);

  // A new step is only taken from a loaded word.
  assert property (@(posedge clk) disable iff (rst || clr) st == S_READ |-> cur_index < num_words);
endmodule
