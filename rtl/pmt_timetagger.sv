// pmt_timetagger: PMT photon time tagger of the main FPGA.
//
// A free-running counter of clock cycles (10 ns at 100 MHz) is cleared by
// `seq_start`, so every tag is a time relative to the start of the pulse
// sequence.  While `enable` is high, each synchronised PMT rising edge pushes
// the current counter value into an on-chip FIFO.  Tags pile up over many
// sequence runs and the host reads them out together at the end, which keeps
// the USB overhead low.  Because the PMT input passes a 2-flop synchroniser
// before this block, each tag is later than the true arrival by a fixed
// 2 cycles (plus the sampling uncertainty of one cycle).  Overflow of the
// FIFO drops tags and sets `overflow`.
//
// Function and resolution follow the paper; widths and depth are this
// design's choices.
module pmt_timetagger #(
  parameter int unsigned TAG_W = 32,
  parameter int unsigned DEPTH = 4096
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic                       seq_start,
  input  logic                       enable,
  input  logic                       pmt_rise,
  input  logic                       rd_en,
  output logic [TAG_W-1:0]           rd_data,
  output logic                       empty,
  output logic [$clog2(DEPTH+1)-1:0] level,
  output logic                       overflow
);
  logic [TAG_W-1:0] t;
  logic             full_unused;

  always_ff @(posedge clk) begin
    if (rst || seq_start) t <= '0;
    else                  t <= t + 1'b1;
  end

  sync_fifo #(.W(TAG_W), .DEPTH(DEPTH)) u_fifo (
    .clk, .rst,
    .wr_en(enable & pmt_rise), .wr_data(t),
    .rd_en, .rd_data, .empty, .full(full_unused), .level, .overflow
  );
endmodule
