// dds_word_ram: the DDS board's setting memory, DEPTH words of 128 bits.
//
// One write port (from the bus receiver) and one read port with a registered
// output (one clock latency), as block RAM provides.  Each word holds one
// complete channel setting in the dds_word_t layout of pulser_pkg.  The
// 128-bit width is the paper's; the depth is this design's choice.
module dds_word_ram
  import pulser_pkg::*;
#(
  parameter int unsigned W     = WORD_W,
  parameter int unsigned DEPTH = 1024
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [W-1:0]             wdata,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [W-1:0]             rdata
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
