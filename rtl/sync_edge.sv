// sync_edge: synchroniser and rising-edge detector for an asynchronous input
// (PMT pulses, DDS step triggers, bus strobes).
//
// The input passes through STAGES flip-flops; `level` is the last stage and
// `rise` is high for one clock when `level` goes from 0 to 1.  Latency from
// the input edge to `rise` is STAGES clocks (plus up to one clock of sampling
// uncertainty).  Pulses shorter than one clock period may be missed.  This is
// a standard circuit of this design; the published description only states
// that the FPGAs receive these signals.
module sync_edge #(
  parameter int unsigned STAGES = 2
) (
  input  logic clk,
  input  logic rst,
  input  logic d,
  output logic level,
  output logic rise
);
  logic [STAGES-1:0] sh;
  logic              last;

  always_ff @(posedge clk) begin
    if (rst) begin
      sh   <= '0;
      last <= 1'b0;
    end else begin
      sh   <= {sh[STAGES-2:0], d};
      last <= sh[STAGES-1];
    end
  end

  assign level = sh[STAGES-1];
  assign rise  = sh[STAGES-1] & ~last;

  initial assert (STAGES >= 2) else $error("sync_edge: STAGES must be >= 2");
endmodule
