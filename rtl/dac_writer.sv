// dac_writer: loads the amplitude code into the AD9744 14-bit DAC that sets
// the control voltage of the variable-gain amplifier.
//
// On `update` (accepted while `busy` is low) the code is registered onto
// dac_data; one clock later dac_clk goes high for CLK_HIGH clocks, and the
// DAC latches the code on that rising edge.  `busy` covers the whole
// 1 + CLK_HIGH + 1 clock transaction.  The VGA is linear in dB, so the
// 14-bit amplitude word maps straight onto the DAC code: 60 dB across 2^14
// codes.  The DAC and the amplitude path are from the paper; the latch
// timing is this design's choice.
module dac_writer #(
  parameter int unsigned DAC_W    = 14,
  parameter int unsigned CLK_HIGH = 2
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             update,
  input  logic [DAC_W-1:0] code,
  output logic             busy,
  output logic [DAC_W-1:0] dac_data,
  output logic             dac_clk
);
  localparam int unsigned CW = $clog2(CLK_HIGH + 3);
  logic [CW-1:0] cyc;

  always_ff @(posedge clk) begin
    if (rst) begin
      busy     <= 1'b0;
      cyc      <= '0;
      dac_data <= '0;
      dac_clk  <= 1'b0;
    end else if (!busy) begin
      if (update) begin
        dac_data <= code;
        busy     <= 1'b1;
        cyc      <= '0;
      end
    end else begin
      cyc <= cyc + 1'b1;
      dac_clk <= (cyc < CW'(CLK_HIGH));
      if (cyc == CW'(CLK_HIGH)) busy <= 1'b0;
    end
  end
endmodule
