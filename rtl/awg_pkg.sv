// awg_pkg: constants and types shared by the arbitrary waveform generator (AWG)
// that drives the five VCO sweep-control outputs of the profile reflectometers.
//
// Follows the paper: five output channels, 14-bit codes, three dual DACs,
// 250 MSPS. This design's own choices: the waveform depth (2^14 words, enough
// for one 40 us sweep plus 10 us dead time = 12500 samples at 250 MSPS), the
// command opcodes and the 6-byte command frame carried over the USB link:
//
//   byte 0  opcode        (awg_op_e)
//   byte 1  channel       (0..NUM_CH-1, ignored by global commands)
//   byte 2  address[15:8]
//   byte 3  address[7:0]
//   byte 4  data[15:8]
//   byte 5  data[7:0]
package awg_pkg;

  localparam int unsigned NUM_CH        = 5;      // VCO control outputs
  localparam int unsigned DAC_W         = 14;     // AD9746 resolution
  localparam int unsigned NUM_DAC_CHIPS = 3;      // dual DACs
  localparam int unsigned WAVE_DEPTH    = 16384;  // samples per channel
  localparam int unsigned FRAME_BYTES   = 6;

  typedef logic [DAC_W-1:0] code_t;

  typedef enum logic [7:0] {
    OP_WAVE_WR   = 8'h01,  // wave[ch][addr]  <= data[13:0]
    OP_LUT_WR    = 8'h02,  // lut[ch][addr]   <= data[13:0]
    OP_SET_LEN   = 8'h03,  // last sample address of a sweep period <= data
    OP_SET_COUNT = 8'h04,  // sweeps per trigger <= {addr,data}; 0 = until stopped
    OP_CAL_EN    = 8'h05,  // calibration enable mask <= data[NUM_CH-1:0]
    OP_ARM       = 8'h06,  // wait for the next trigger
    OP_STOP      = 8'h07   // end playback / disarm
  } awg_op_e;

  // One decoded command, valid for one clock.
  typedef struct packed {
    logic        valid;
    awg_op_e     op;
    logic [7:0]  ch;
    logic [15:0] addr;
    logic [15:0] data;
  } awg_cmd_t;

  typedef struct packed {
    logic        armed;
    logic        playing;
    logic        sweep_start;  // first sample address of a sweep period
    logic [31:0] sweeps_done;
  } awg_status_t;

endpackage
