// ok_fpga: the logic of the main FPGA.
//
// It holds the pulse sequencer (32 TTL outputs plus one step-trigger line per
// DDS board), the PMT input synchroniser feeding both the gated PMT counter
// and the PMT time tagger, and the master of the bus that loads the DDS
// boards.  Everything runs on one clock (100 MHz assumed: 40 ns sequencer
// ticks, 10 ns time tags).  The host ports stand in for the USB endpoints of
// the FPGA module: event-memory writes and start/stop for the sequencer, two
// FIFO read ports for counts and tags, and a valid/ready word port plus a
// clear request for the DDS bus.  Time tags are taken only while the
// sequence runs and `tag_enable` is set, and are relative to the start of
// the latest run: a tag is the number of clocks from the clock edge that
// takes the start command to the edge that first samples the PMT pulse (the
// synchroniser delay and the one-clock delay of the start pulse cancel).  On
// the same scale the outputs of an event at tick T change at clock 4*(T+1).  Nothing crosses from the host while the sequence runs.
// The partitioning follows the paper; the host-port shapes are this
// design's choices.
module ok_fpga
  import pulser_pkg::*;
#(
  parameter int unsigned SEQ_DEPTH     = 2048,
  parameter int unsigned TICK_CYCLES   = 4,
  parameter int unsigned CNT_DEPTH     = 1024,
  parameter int unsigned TAG_DEPTH     = 4096,
  parameter int unsigned STROBE_CYCLES = 8
) (
  input  logic                           clk,
  input  logic                           rst,
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
  // DDS bus host port
  input  logic                           dds_in_valid,
  output logic                           dds_in_ready,
  input  logic [15:0]                    dds_in_data,
  input  logic [3:0]                     dds_in_sel,
  input  logic                           dds_clr_req,
  output logic                           dds_bus_busy,
  // to the outside
  output logic [NUM_TTL-1:0]             ttl_out,
  output logic [NUM_DDS-1:0]             dds_trig,
  output dds_bus_t                       dds_bus
);
  logic [SEQ_OUT_W-1:0] seq_out;
  logic                 seq_start_pulse;
  logic [SEQ_TIME_W-1:0] seq_time_unused;
  logic                 pmt_rise, pmt_lvl_unused;
  logic [$clog2(CNT_DEPTH+1)-1:0] cnt_level_unused;

  pulse_sequencer #(.NUM_OUT(SEQ_OUT_W), .TIME_W(SEQ_TIME_W), .DEPTH(SEQ_DEPTH),
                    .TICK_CYCLES(TICK_CYCLES)) u_seq (
    .clk, .rst, .wr_en(seq_wr_en), .wr_addr(seq_wr_addr), .wr_data(seq_wr_data),
    .num_events(seq_num_events), .start(seq_start), .stop(seq_stop),
    .out_state(seq_out), .running(seq_running), .seq_start(seq_start_pulse),
    .done(seq_done), .time_ticks(seq_time_unused));

  assign ttl_out  = seq_out[NUM_TTL-1:0];
  assign dds_trig = seq_out[SEQ_OUT_W-1:NUM_TTL];

  sync_edge u_pmt (.clk, .rst, .d(pmt_in), .level(pmt_lvl_unused), .rise(pmt_rise));

  pmt_counter #(.CNT_W(32), .DEPTH(CNT_DEPTH)) u_cnt (
    .clk, .rst, .enable(cnt_enable), .period(cnt_period), .pmt_rise,
    .rd_en(cnt_rd_en), .rd_data(cnt_rd_data), .empty(cnt_empty),
    .level(cnt_level_unused), .overflow(cnt_overflow));

  pmt_timetagger #(.TAG_W(32), .DEPTH(TAG_DEPTH)) u_tag (
    .clk, .rst, .seq_start(seq_start_pulse), .enable(tag_enable && seq_running),
    .pmt_rise, .rd_en(tag_rd_en), .rd_data(tag_rd_data), .empty(tag_empty),
    .level(tag_level), .overflow(tag_overflow));

  dds_bus_master #(.STROBE_CYCLES(STROBE_CYCLES)) u_bus (
    .clk, .rst, .in_valid(dds_in_valid), .in_ready(dds_in_ready),
    .in_data(dds_in_data), .in_sel(dds_in_sel), .clr_req(dds_clr_req),
    .bus(dds_bus), .busy(dds_bus_busy));
endmodule
