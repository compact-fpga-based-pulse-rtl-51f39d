// pmt_counter: PMT pulse counter of the main FPGA.
//
// Counts synchronised PMT rising edges (one count per clock at most, i.e. up
// to 100 MHz at a 100 MHz clock) in back-to-back gate windows of `period`
// clocks while `enable` is high.  At the end of each window the count is
// pushed into a FIFO that the host empties at its leisure, and counting of
// the next window starts in the same clock, so no pulse is lost between
// windows.  Dropping `enable` discards the partial window.  A full FIFO drops
// the count and sets `overflow`.
//
// The paper states only that a 100 MHz counter counts PMT pulses; the gate
// windows and FIFO are this design's way of delivering the counts.
module pmt_counter #(
  parameter int unsigned CNT_W = 32,
  parameter int unsigned DEPTH = 1024
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic                       enable,
  input  logic [31:0]                period,
  input  logic                       pmt_rise,
  input  logic                       rd_en,
  output logic [CNT_W-1:0]           rd_data,
  output logic                       empty,
  output logic [$clog2(DEPTH+1)-1:0] level,
  output logic                       overflow
);
  logic [31:0]      win;
  logic [CNT_W-1:0] cnt;
  logic             push;
  logic [CNT_W-1:0] push_data;
  logic             full_unused;

  always_ff @(posedge clk) begin
    if (rst || !enable) begin
      win       <= '0;
      cnt       <= '0;
      push      <= 1'b0;
      push_data <= '0;
    end else begin
      push <= 1'b0;
      if (win + 1 >= period) begin
        win       <= '0;
        push      <= 1'b1;
        push_data <= cnt + CNT_W'(pmt_rise);
        cnt       <= '0;
      end else begin
        win <= win + 1;
        cnt <= cnt + CNT_W'(pmt_rise);
      end
    end
  end

  sync_fifo #(.W(CNT_W), .DEPTH(DEPTH)) u_fifo (
    .clk, .rst,
    .wr_en(push), .wr_data(push_data),
    .rd_en, .rd_data, .empty, .full(full_unused), .level, .overflow
  );
endmodule
