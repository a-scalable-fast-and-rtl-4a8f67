// mawg_pkg -- constants and types shared by the waveform generator.
//
// Holds the memory geometry of a daughter card (128 k words of 36 bits,
// 16 segments of 8 k words, two 18-bit sub-words per word), the command
// opcodes of the command sequencer and the backplane bus struct.
//
// Following the paper: the geometry, the 16-bit DAC, the 12 cards and the
// command codes 16, 17, 18, 19, 32, 34, 35 and 41 (StartSegment uses the
// segment number 0..15 as its code). The header words, the 32-bit command
// word format and the meaning of each backplane control line are this
// design's own choices; the backplane widths (10 control, 8 data, 8 address)
// follow the control-board block diagram.
// Lint note: each module uses only some of these constants, so a lint run of
// one module alone reports the others as unused parameters; they are used
// elsewhere in the design or document the geometry.
package mawg_pkg;

  localparam int unsigned NUM_CARDS    = 12;
  localparam int unsigned SRAM_DEPTH   = 131072;          // 128 k words
  localparam int unsigned SRAM_AW      = 17;
  localparam int unsigned SRAM_DW      = 36;
  localparam int unsigned NUM_SEGMENTS = 16;
  localparam int unsigned SEG_SHIFT    = 13;              // 8 k words per segment
  localparam int unsigned DAC_BITS     = 16;
  localparam int unsigned PACKET_BYTES = 9;               // 4 sub-words

  // Package framing words (own choice).
  localparam logic [15:0] DATA_HDR = 16'hA5DA;
  localparam logic [15:0] CMD_HDR  = 16'hA5C0;
  localparam logic [15:0] END_HDR  = 16'h5AED;

  // Command identifiers. 0..15 = StartSegment of that segment.
  typedef enum logic [7:0] {
    OP_PAUSE      = 8'd16,
    OP_REPEAT     = 8'd17,
    OP_SEND_PULSE = 8'd18,
    OP_WAIT_PULSE = 8'd19,
    OP_START_SEQ  = 8'd32,
    OP_SET_RATE   = 8'd34,
    OP_EXT_CLK    = 8'd35,
    OP_END_SEQ    = 8'd41
  } opcode_e;

  // A command: identifier and a 24-bit argument. Repeat packs
  // {start index[7:0], count[15:0]} into the argument.
  typedef struct packed {
    logic [7:0]  op;
    logic [23:0] arg;
  } cmd_t;

  function automatic logic is_start_segment(logic [7:0] op);
    return op < 8'(NUM_SEGMENTS);
  endfunction

  // Write job handed from the package decoder to the memory writer.
  typedef struct packed {
    logic [4:0]  channel;     // 0..23
    logic [3:0]  segment;     // 0..15
    logic [15:0] npackets;    // number of 9-byte packets
  } wr_job_t;

  // Backplane control lines (10, own assignment of meaning).
  typedef struct packed {
    logic       tick;       // update-clock tick (one system cycle wide)
    logic       rd_load;    // read port: load segment start address
    logic       rd_en;      // read port: read one word and count up
    logic [1:0] clk_mode;   // per channel: 1 = continued-clock, 0 = stopped-clock
    logic       wr_load;    // write port: load {card, segment} address
    logic       wr_stb;     // write port: write one 9-bit byte lane
    logic [1:0] wr_lane;    // byte lane 0..3 of the 36-bit word
    logic       wr_bit8;    // ninth bit of the byte lane (steering bit)
  } bp_ctrl_t;

  typedef struct packed {
    bp_ctrl_t   ctrl;
    logic [7:0] addr;       // {card[3:0], segment[3:0]}
    logic [7:0] data;
  } bp_bus_t;

endpackage
