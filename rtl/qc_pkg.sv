// qc_pkg -- constants and types shared by the qubit readout-and-feedback firmware.
//
// The firmware runs at 125 MHz and carries the converter sample streams at
// 500 MSPS, so every clock moves SPC = 4 samples per channel (lane 0 is the
// oldest sample of the word). The ADC samples are 12-bit and the DAC samples
// 14-bit two's complement, as on the converters the firmware was built for.
// The accumulator width, counter widths and the sequencer instruction format
// are this design's own choices.
package qc_pkg;

  // Samples per 125 MHz clock (500 MSPS / 125 MHz).
  localparam int unsigned SPC   = 4;
  // Converter sample widths.
  localparam int unsigned ADC_W = 12;
  localparam int unsigned DAC_W = 14;
  // Width of one point-wise product signal*reference.
  localparam int unsigned PROD_W = 2 * ADC_W;
  // Acquisition window length counter (in clocks).
  localparam int unsigned LEN_W = 16;
  // I/Q accumulator: product + lane sum + up to 2^LEN_W clocks.
  localparam int unsigned ACC_W = PROD_W + $clog2(SPC) + LEN_W;
  // Discriminator coefficient widths.
  localparam int unsigned COEF_W = 18;
  localparam int unsigned BIAS_W = 64;
  // Pulse envelope memory address width and envelope sample width.
  localparam int unsigned ENV_AW = 10;
  localparam int unsigned ENV_W  = 16;
  // Sequencer program memory address width.
  localparam int unsigned PROG_AW = 6;

  // Default acquisition window: 800 ns at 125 MHz.
  localparam int unsigned READOUT_CLKS = 100;

  // Pulse generator channels.
  typedef enum logic {
    CH_READOUT = 1'b0,
    CH_DRIVE   = 1'b1
  } pulse_ch_e;

  // Sequencer opcodes, instruction bits [31:28].
  typedef enum logic [3:0] {
    OP_END    = 4'h0,  // stop, raise done
    OP_PULSE  = 4'h1,  // [27] channel, [25:16] envelope address, [15:0] length (clocks)
    OP_ACQ    = 4'h2,  // [27] histogram tag, [15:0] window length (clocks)
    OP_WAIT   = 4'h3,  // [15:0] clocks to wait
    OP_BRANCH = 4'h4,  // wait for state estimate; jump to addr if state == [27]
    OP_JUMP   = 4'h5   // jump to addr
  } opcode_e;

  typedef struct packed {
    opcode_e     op;     // [31:28]
    logic        flag;   // [27]   channel / tag / branch condition
    logic        rsvd;   // [26]
    logic [9:0]  addr;   // [25:16] envelope or jump address
    logic [15:0] imm;    // [15:0]  length
  } instr_t;

endpackage
