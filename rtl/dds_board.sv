// dds_board: the FPGA logic of one DDS board (one RF channel).
//
// Before a run the main FPGA loads the board's setting words over the shared
// bus (dds_bus_receiver -> dds_word_ram).  During the run each rising edge of
// the board's trigger line, synchronised to the board clock, steps to the
// next word, and dds_channel_ctrl programs the DDS chip (frequency, phase,
// output on/off) over its 16-bit parallel port and the amplitude DAC, and
// runs the frequency and amplitude ramps.  A clear on the bus resets both
// the load address and the step position.
//
// Timing: the trigger passes a 2-flop synchroniser (2-3 clocks), the step
// takes 3 clocks, the ramp counters update one clock later, and the DAC or
// DDS write starts the clock after that.  All of it runs on the board's own
// clock (62.5 MHz assumed).  The split into these parts follows the paper's
// description of the board; the clock and sizes are this design's choices.
module dds_board
  import pulser_pkg::*;
#(
  parameter int unsigned BOARD_ID      = 0,
  parameter int unsigned DEPTH         = 1024,
  parameter int unsigned PERIOD_CYCLES = 128,
  parameter int unsigned WR_CYCLES     = 6,
  parameter int unsigned UPD_CYCLES    = 4
) (
  input  logic                       clk,
  input  logic                       rst,
  input  dds_bus_t                   bus,
  input  logic                       trig_in,
  output logic [7:0]                 dds_addr,
  output logic [15:0]                dds_data,
  output logic                       dds_wr_n,
  output logic                       dds_io_update,
  output logic [AMP_W-1:0]           dac_data,
  output logic                       dac_clk,
  output logic [$clog2(DEPTH+1)-1:0] num_words,
  output logic [$clog2(DEPTH+1)-1:0] cur_index,
  output logic                       rf_on,
  output logic                       amp_ramping,
  output logic                       freq_ramping
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic              mem_we, clr_pulse, trig_rise, trig_lvl_unused;
  logic [AW-1:0]     mem_waddr, mem_raddr;
  logic [WORD_W-1:0] mem_wdata, mem_rdata;

  dds_bus_receiver #(.BOARD_ID(BOARD_ID), .DEPTH(DEPTH)) u_rx (
    .clk, .rst, .bus, .mem_we, .mem_addr(mem_waddr), .mem_wdata,
    .num_words, .clr_pulse);

  dds_word_ram #(.W(WORD_W), .DEPTH(DEPTH)) u_ram (
    .clk, .we(mem_we), .waddr(mem_waddr), .wdata(mem_wdata),
    .raddr(mem_raddr), .rdata(mem_rdata));

  sync_edge u_trig (.clk, .rst, .d(trig_in), .level(trig_lvl_unused), .rise(trig_rise));

  dds_channel_ctrl #(.DEPTH(DEPTH), .PERIOD_CYCLES(PERIOD_CYCLES),
                     .WR_CYCLES(WR_CYCLES), .UPD_CYCLES(UPD_CYCLES)) u_ctrl (
    .clk, .rst, .clr(clr_pulse), .trig_rise, .num_words,
    .mem_raddr, .mem_rdata,
    .dds_addr, .dds_data, .dds_wr_n, .dds_io_update, .dac_data, .dac_clk,
    .cur_index, .rf_on, .amp_ramping, .freq_ramping);
endmodule
