// pulser_system: the complete unit, one main FPGA and NUM_DDS DDS boards.
//
// The main FPGA (ok_fpga) plays the TTL pulse sequence, counts and
// time-tags PMT pulses, and loads all DDS boards over one shared bus; the
// boards are told apart by the board select on that bus.  Each board has its
// own step-trigger line from the sequencer and its own clock (clk_dds[i]),
// and drives its own DDS chip and amplitude DAC, whose pins are the outputs
// here.  The analog parts (DDS chip, DAC, amplifier, 2 GHz reference, line
// transceivers) are outside.  Host ports stand in for the USB endpoints.
// The structure (one main FPGA, sixteen boards on one bus) follows the
// paper's block diagram.
module pulser_system
  import pulser_pkg::*;
#(
  parameter int unsigned SEQ_DEPTH     = 2048,
  parameter int unsigned TAG_DEPTH     = 4096,
  parameter int unsigned DDS_DEPTH     = 1024
) (
  input  logic                           clk_ok,
  input  logic                           rst_ok,
  input  logic [NUM_DDS-1:0]             clk_dds,
  input  logic [NUM_DDS-1:0]             rst_dds,
  // sequencer host port
  input  logic                           seq_wr_en,
  input  logic [$clog2(SEQ_DEPTH)-1:0]   seq_wr_addr,
  input  seq_event_t                     seq_wr_data,
  input  logic [$clog2(SEQ_DEPTH+1)-1:0] seq_num_events,
  input  logic                           seq_start,
  input  logic                           seq_stop,
  output logic                           seq_running,
  output logic                           seq_done,
  // PMT
  input  logic                           pmt_in,
  input  logic                           cnt_enable,
  input  logic [31:0]                    cnt_period,
  input  logic                           cnt_rd_en,
  output logic [31:0]                    cnt_rd_data,
  output logic                           cnt_empty,
  output logic                           cnt_overflow,
  input  logic                           tag_enable,
  input  logic                           tag_rd_en,
  output logic [31:0]                    tag_rd_data,
  output logic                           tag_empty,
  output logic [$clog2(TAG_DEPTH+1)-1:0] tag_level,
  output logic                           tag_overflow,
  // DDS load port
  input  logic                           dds_in_valid,
  output logic                           dds_in_ready,
  input  logic [15:0]                    dds_in_data,
  input  logic [3:0]                     dds_in_sel,
  input  logic                           dds_clr_req,
  output logic                           dds_bus_busy,
  // TTL outputs
  output logic [NUM_TTL-1:0]             ttl_out,
  // per-board chip pins and status
  output logic [NUM_DDS-1:0][7:0]        dds_addr,
  output logic [NUM_DDS-1:0][15:0]       dds_data,
  output logic [NUM_DDS-1:0]             dds_wr_n,
  output logic [NUM_DDS-1:0]             dds_io_update,
  output logic [NUM_DDS-1:0][AMP_W-1:0]  dac_data,
  output logic [NUM_DDS-1:0]             dac_clk,
  output logic [NUM_DDS-1:0]             rf_on,
  output logic [NUM_DDS-1:0]             amp_ramping,
  output logic [NUM_DDS-1:0]             freq_ramping,
  output logic [NUM_DDS-1:0][$clog2(DDS_DEPTH+1)-1:0] dds_num_words,
  output logic [NUM_DDS-1:0][$clog2(DDS_DEPTH+1)-1:0] dds_cur_index
);
  dds_bus_t           bus;
  logic [NUM_DDS-1:0] trig;

  ok_fpga #(.SEQ_DEPTH(SEQ_DEPTH), .TAG_DEPTH(TAG_DEPTH)) u_ok (
    .clk(clk_ok), .rst(rst_ok),
    .seq_wr_en, .seq_wr_addr, .seq_wr_data, .seq_num_events, .seq_start, .seq_stop,
    .seq_running, .seq_done,
    .pmt_in, .cnt_enable, .cnt_period, .cnt_rd_en, .cnt_rd_data, .cnt_empty, .cnt_overflow,
    .tag_enable, .tag_rd_en, .tag_rd_data, .tag_empty, .tag_level, .tag_overflow,
    .dds_in_valid, .dds_in_ready, .dds_in_data, .dds_in_sel, .dds_clr_req, .dds_bus_busy,
    .ttl_out, .dds_trig(trig), .dds_bus(bus));

  for (genvar i = 0; i < NUM_DDS; i++) begin : g_board
    dds_board #(.BOARD_ID(i), .DEPTH(DDS_DEPTH)) u_board (
      .clk(clk_dds[i]), .rst(rst_dds[i]), .bus, .trig_in(trig[i]),
      .dds_addr(dds_addr[i]), .dds_data(dds_data[i]), .dds_wr_n(dds_wr_n[i]),
      .dds_io_update(dds_io_update[i]), .dac_data(dac_data[i]), .dac_clk(dac_clk[i]),
      .num_words(dds_num_words[i]), .cur_index(dds_cur_index[i]), .rf_on(rf_on[i]),
      .amp_ramping(amp_ramping[i]), .freq_ramping(freq_ramping[i]));
  end
endmodule
