// dds_bus_receiver: the DDS board's end of the shared bus.
//
// The write strobe and the clear line are synchronised to the board clock.
// On each rising edge of the synchronised strobe, if the board select equals
// BOARD_ID, the 16-bit data word (held stable by the master for the whole
// strobe, so it may be sampled here without its own synchroniser) is shifted
// into a 128-bit assembly register, least significant half-word first.  The
// eighth half-word completes a DDS word, which is written to the word memory
// at the next load address; `num_words` counts the words loaded.  A clear
// resets the load address and the half-word count and gives one `clr_pulse`.
// A word is written three board clocks after the rising edge of the eighth
// strobe reaches the board.
//
// The paper says the board stores the data it receives from the main FPGA in
// its memory; the packing order and the clear are this design's choices.
module dds_bus_receiver
  import pulser_pkg::*;
#(
  parameter int unsigned BOARD_ID = 0,
  parameter int unsigned DEPTH    = 1024
) (
  input  logic                        clk,
  input  logic                        rst,
  input  dds_bus_t                    bus,
  output logic                        mem_we,
  output logic [$clog2(DEPTH)-1:0]    mem_addr,
  output logic [WORD_W-1:0]           mem_wdata,
  output logic [$clog2(DEPTH+1)-1:0]  num_words,
  output logic                        clr_pulse
);
  localparam int unsigned NW = $clog2(DEPTH+1);

  logic          wr_rise, clr_rise, wr_lvl_unused, clr_lvl_unused;
  logic [2:0]    hw;
  logic [WORD_W-17:0] asm_q;   // the seven half-words received so far

  sync_edge u_wr  (.clk, .rst, .d(bus.wr),  .level(wr_lvl_unused),  .rise(wr_rise));
  sync_edge u_clr (.clk, .rst, .d(bus.clr), .level(clr_lvl_unused), .rise(clr_rise));

  always_ff @(posedge clk) begin
    if (rst) begin
      hw        <= '0;
      asm_q     <= '0;
      mem_we    <= 1'b0;
      mem_addr  <= '0;
      mem_wdata <= '0;
      num_words <= '0;
      clr_pulse <= 1'b0;
    end else begin
      mem_we    <= 1'b0;
      clr_pulse <= 1'b0;
      if (mem_we) mem_addr <= mem_addr + 1'b1;
      if (clr_rise) begin
        hw        <= '0;
        mem_addr  <= '0;
        num_words <= '0;
        clr_pulse <= 1'b1;
      end else if (wr_rise && bus.sel == 4'(BOARD_ID)) begin
        asm_q <= {bus.data, asm_q[WORD_W-17:16]};
        hw    <= hw + 1'b1;
        if (hw == 3'd7) begin
          mem_we    <= (num_words < NW'(DEPTH));
          mem_wdata <= {bus.data, asm_q};
          if (num_words < NW'(DEPTH)) num_words <= num_words + 1'b1;
        end
      end
    end
  end
endmodule
