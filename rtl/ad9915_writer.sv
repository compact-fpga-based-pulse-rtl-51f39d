// ad9915_writer: parallel-port write engine for the AD9915 DDS chip.
//
// A command writes `nwords` (1 to 4) consecutive 16-bit half-words of `data`
// (least significant first) to byte addresses base_addr, base_addr+2, ...
// and then pulses IO_UPDATE so that the chip applies them together.  Every
// half-word takes WR_CYCLES clocks: one clock of address/data setup, then
// WR_CYCLES-2 clocks with dds_wr_n low, then one clock of hold.  IO_UPDATE is
// high for UPD_CYCLES clocks.  All pin outputs are registered.  `done`
// rises nwords*WR_CYCLES + UPD_CYCLES + 1 clocks after the `start` edge, and
// `start` is accepted only while `busy` is low.  At a 62.5 MHz board clock a
// frequency write (4 half-words) takes 28 clocks (448 ns) and a phase or
// output on/off write 10 clocks (160 ns); the published switching times
// (about 1 us, 500 ns and +200 ns) also contain the chip's own pipeline delay
// and the analog response.
//
// The 16-bit bus to the DDS chip is from the paper; cycle timing and the
// write-then-update protocol are this design's choices.
module ad9915_writer #(
  parameter int unsigned WR_CYCLES  = 6,
  parameter int unsigned UPD_CYCLES = 4
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        start,
  input  logic [7:0]  base_addr,
  input  logic [2:0]  nwords,
  input  logic [63:0] data,
  output logic        busy,
  output logic        done,
  output logic [7:0]  dds_addr,
  output logic [15:0] dds_data,
  output logic        dds_wr_n,
  output logic        dds_io_update
);
  typedef enum logic [1:0] {IDLE, WRITE, UPDATE, FIN} state_t;
  localparam int unsigned CW = $clog2(WR_CYCLES + UPD_CYCLES + 1);

  state_t        st;
  logic [CW-1:0] cyc;
  logic [1:0]    idx;
  logic [2:0]    n_q;
  logic [7:0]    base_q;
  logic [63:0]   data_q;

  assign busy = (st != IDLE);

  always_ff @(posedge clk) begin
    if (rst) begin
      st            <= IDLE;
      cyc           <= '0;
      idx           <= '0;
      n_q           <= '0;
      base_q        <= '0;
      data_q        <= '0;
      done          <= 1'b0;
      dds_addr      <= '0;
      dds_data      <= '0;
      dds_wr_n      <= 1'b1;
      dds_io_update <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st)
        IDLE: if (start) begin
          st     <= WRITE;
          cyc    <= '0;
          idx    <= '0;
          n_q    <= (nwords == 0) ? 3'd1 : ((nwords > 4) ? 3'd4 : nwords);
          base_q <= base_addr;
          data_q <= data;
        end
        WRITE: begin
          dds_addr <= base_q + {5'd0, idx, 1'b0};
          dds_data <= data_q[{idx, 4'd0} +: 16];
          dds_wr_n <= !(cyc >= 1 && cyc <= CW'(WR_CYCLES - 2));
          if (cyc == CW'(WR_CYCLES - 1)) begin
            cyc <= '0;
            idx <= idx + 1'b1;
            if ({1'b0, idx} + 3'd1 == n_q) st <= UPDATE;
          end else cyc <= cyc + 1'b1;
        end
        UPDATE: begin
          dds_wr_n      <= 1'b1;
          dds_io_update <= 1'b1;
          if (cyc == CW'(UPD_CYCLES - 1)) begin
            cyc <= '0;
            st  <= FIN;
          end else cyc <= cyc + 1'b1;
        end
        FIN: begin
          dds_io_update <= 1'b0;
          done          <= 1'b1;
          st            <= IDLE;
        end
        default: st <= IDLE;
      endcase
    end
  end

  initial assert (WR_CYCLES >= 3) else $error("ad9915_writer: WR_CYCLES must be >= 3");
  // The write strobe and IO_UPDATE are never active together.
  assert property (@(posedge clk) disable iff (rst) !(!dds_wr_n && dds_io_update));
endmodule
