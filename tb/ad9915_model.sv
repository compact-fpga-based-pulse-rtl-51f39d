// ad9915_model: behavioural model of the DDS chip's parallel port, for
// testbenches only.
//
// It keeps a buffer of 128 half-word registers, written at the rising edge
// of wr_n from addr/data (byte address, half-word aligned), and copies the
// buffer into the active registers on the rising edge of io_update, as the
// real chip does.  The testbench reads the active frequency (4 half-words at
// pulser_pkg::DDS_ADDR_FREQ), phase and output-enable words, and counts the
// write strobes and updates.
module ad9915_model
  import pulser_pkg::*;
(
  input logic [7:0]  addr,
  input logic [15:0] data,
  input logic        wr_n,
  input logic        io_update
);
  logic [15:0] buf_q [128];
  logic [15:0] act   [128];
  int unsigned n_writes  = 0;
  int unsigned n_updates = 0;

  initial begin
    for (int i = 0; i < 128; i++) begin
      buf_q[i] = '0;
      act[i]   = '0;
    end
  end

  always @(posedge wr_n) begin
    buf_q[addr[7:1]] = data;
    n_writes++;
  end

  always @(posedge io_update) begin
    act = buf_q;
    n_updates++;
  end

  function automatic logic [63:0] freq();
    int b = DDS_ADDR_FREQ >> 1;
    return {act[b+3], act[b+2], act[b+1], act[b]};
  endfunction
  function automatic logic [15:0] phase();
    return act[DDS_ADDR_PHASE >> 1];
  endfunction
  function automatic logic outen();
    return act[DDS_ADDR_OUTEN >> 1][0];
  endfunction
endmodule
