// sync_fifo: single-clock first-word-fall-through FIFO, used as the on-chip
// buffer for PMT time tags and gate counts so that the host can read many
// results at once after a run.
//
// Storage is a plain array (maps to block RAM).  `rd_data` shows the oldest
// entry whenever `empty` is low; `rd_en` pops it.  A push when full is
// dropped and sets the sticky `overflow` flag until reset.  A push and a pop
// in the same clock are both honoured.
module sync_fifo #(
  parameter int unsigned W     = 32,
  parameter int unsigned DEPTH = 16
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic                       wr_en,
  input  logic [W-1:0]               wr_data,
  input  logic                       rd_en,
  output logic [W-1:0]               rd_data,
  output logic                       empty,
  output logic                       full,
  output logic [$clog2(DEPTH+1)-1:0] level,
  output logic                       overflow
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic          do_wr, do_rd;

  assign empty   = (level == 0);
  assign full    = (level == DEPTH[$clog2(DEPTH+1)-1:0]);
  assign do_rd   = rd_en & ~empty;
  assign do_wr   = wr_en & (~full | do_rd);
  assign rd_data = mem[rp];

  always_ff @(posedge clk) begin
    if (do_wr) mem[wp] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wp       <= '0;
      rp       <= '0;
      level    <= '0;
      overflow <= 1'b0;
    end else begin
      if (do_wr) wp <= (wp == AW'(DEPTH-1)) ? '0 : wp + 1'b1;
      if (do_rd) rp <= (rp == AW'(DEPTH-1)) ? '0 : rp + 1'b1;
      if (do_wr && !do_rd)      level <= level + 1'b1;
      else if (do_rd && !do_wr) level <= level - 1'b1;
      if (wr_en && !do_wr) overflow <= 1'b1;
    end
  end

  initial assert (DEPTH >= 2) else $error("sync_fifo: DEPTH must be >= 2");
endmodule
