// pulser_pkg: types and constants shared by the pulse sequencer / multi-channel
// DDS unit.
//
// The unit has one main FPGA (pulse sequencer, PMT counter, PMT time tagger,
// bus master) and NUM_DDS DDS boards, each with its own small FPGA.  The main
// FPGA talks to all boards over one shared 16-bit bus with a few auxiliary
// lines (dds_bus_t) and steps each board with its own trigger line.
//
// A DDS board stores 128-bit words (dds_word_t).  The field widths follow the
// published bit allocation (64-bit frequency, 14-bit amplitude, 16-bit phase,
// 16-bit frequency-ramp rate, 16-bit amplitude-ramp rate).  The bit positions
// are this design's choice: fields are packed in that order from bit 0 up,
// with two spare bits on top.  The AD9915 register addresses below are
// placeholders of this design and must be set from the chip's data sheet.
package pulser_pkg;

  localparam int unsigned NUM_TTL = 32;   // TTL outputs ("at least 32")
  localparam int unsigned NUM_DDS = 16;   // DDS boards

  localparam int unsigned FREQ_W  = 64;
  localparam int unsigned AMP_W   = 14;
  localparam int unsigned PHASE_W = 16;
  localparam int unsigned RATE_W  = 16;
  localparam int unsigned WORD_W  = 128;

  // One DDS setting.  Packed: the first member is the most significant.
  typedef struct packed {
    logic [1:0]         spare;
    logic [RATE_W-1:0]  amp_ramp;    // bits 125:110
    logic [RATE_W-1:0]  freq_ramp;   // bits 109:94
    logic [PHASE_W-1:0] phase;       // bits  93:78
    logic [AMP_W-1:0]   amp;         // bits  77:64, 0 = output off
    logic [FREQ_W-1:0]  freq;        // bits  63:0
  } dds_word_t;

  // Shared bus from the main FPGA to the DDS boards.
  typedef struct packed {
    logic [15:0] data;   // payload
    logic [3:0]  sel;    // board select
    logic        wr;     // write strobe: data/sel valid while high
    logic        clr;    // clear: boards reset their load and step pointers
  } dds_bus_t;

  // One pulse-sequence event: at sequence time `time_ticks` the outputs take `state`.
  localparam int unsigned SEQ_TIME_W = 32;
  localparam int unsigned SEQ_OUT_W  = NUM_TTL + NUM_DDS;
  typedef struct packed {
    logic [SEQ_TIME_W-1:0] time_ticks;
    logic [SEQ_OUT_W-1:0]  state;
  } seq_event_t;

  // AD9915 parallel-port byte addresses (placeholders, see header).
  localparam logic [7:0] DDS_ADDR_OUTEN = 8'h00; // output on/off control word
  localparam logic [7:0] DDS_ADDR_FREQ  = 8'h10; // 4 half-words, LSB first
  localparam logic [7:0] DDS_ADDR_PHASE = 8'h30; // 1 half-word

endpackage
