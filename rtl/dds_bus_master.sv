// dds_bus_master: drives the shared DDS data bus from the main FPGA.
//
// The host hands over one 16-bit word and the number of the DDS board it is
// meant for (valid/ready handshake).  The word and the 4-bit board select are
// put on the bus and the write strobe `wr` is held high for STROBE_CYCLES
// clocks and then low for STROBE_CYCLES clocks, with data and select held the
// whole time.  The strobe is deliberately slow: every DDS board runs on its
// own clock and samples the bus only after synchronising the strobe, so the
// strobe must stay high for at least three of the board's clock periods
// (80 ns against 16 ns at the default sizes).  A `clr_req` pulse is queued and
// sent as a clear pulse of the same shape on the `clr` line; a queued clear
// goes out before the next word.  One word therefore takes 2*STROBE_CYCLES
// clocks; a 128-bit DDS word needs eight of them.
//
// The 16-bit bus and "a few auxiliary lines" are from the paper; the select,
// strobe and clear lines and their timing are this design's choices.
module dds_bus_master
  import pulser_pkg::*;
#(
  parameter int unsigned STROBE_CYCLES = 8
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        in_valid,
  output logic        in_ready,
  input  logic [15:0] in_data,
  input  logic [3:0]  in_sel,
  input  logic        clr_req,
  output dds_bus_t    bus,
  output logic        busy
);
  typedef enum logic [1:0] {IDLE, HIGH, LOW} state_t;
  localparam int unsigned CW = $clog2(STROBE_CYCLES + 1);

  state_t        st;
  logic [CW-1:0] cnt;
  logic          clr_pend;

  assign in_ready = (st == IDLE) && !clr_pend && !clr_req;
  assign busy     = (st != IDLE) || clr_pend;

  always_ff @(posedge clk) begin
    if (rst) begin
      st       <= IDLE;
      cnt      <= '0;
      clr_pend <= 1'b0;
      bus      <= '0;
    end else begin
      if (clr_req) clr_pend <= 1'b1;
      unique case (st)
        IDLE: begin
          if (clr_pend) begin
            clr_pend <= clr_req;
            bus.clr  <= 1'b1;
            bus.wr   <= 1'b0;
            cnt      <= '0;
            st       <= HIGH;
          end else if (in_valid && in_ready) begin
            bus.data <= in_data;
            bus.sel  <= in_sel;
            bus.wr   <= 1'b1;
            cnt      <= '0;
            st       <= HIGH;
          end
        end
        HIGH: begin
          if (cnt == CW'(STROBE_CYCLES - 1)) begin
            bus.wr  <= 1'b0;
            bus.clr <= 1'b0;
            cnt     <= '0;
            st      <= LOW;
          end else cnt <= cnt + 1'b1;
        end
        LOW: begin
          if (cnt == CW'(STROBE_CYCLES - 1)) st <= IDLE;
          else cnt <= cnt + 1'b1;
        end
        default: st <= IDLE;
      endcase
    end
  end

  // Handshake rule: a word offered must stay until it is taken.
  assert property (@(posedge clk) disable iff (rst)
    in_valid && !in_ready |=> in_valid && $stable(in_data) && $stable(in_sel));
  // The bus never raises write and clear together.
  assert property (@(posedge clk) disable iff (rst) !(bus.wr && bus.clr));
endmodule
