// daq_pkg: types and constants shared by the ACDC (front-end) and ACC
// (central card) FPGA logic of the PSEC4 data acquisition system.
//
// Counts that the system is built around follow the published system:
// five 6-channel PSEC4 chips per ACDC board (30 channels), 256 sample cells
// per channel, up to 8 ACDC boards per central card, up to 8 central cards
// under one crate master. The 12-bit sample
// width, the 16-bit link word and the packet/register encodings below are
// this design's own choices.
package daq_pkg;

  localparam int unsigned N_PSEC4      = 5;   // PSEC4 chips per ACDC board
  localparam int unsigned CH_PER_PSEC4 = 6;   // channels per PSEC4
  localparam int unsigned N_CH         = N_PSEC4 * CH_PER_PSEC4; // 30
  localparam int unsigned N_CELLS      = 256; // sample cells per channel
  localparam int unsigned N_ACDC       = 8;   // ACDC boards per central card
  localparam int unsigned ADC_BITS     = 12;  // PSEC4 sample width
  localparam int unsigned WORD_W       = 16;  // serial link word

  // Trigger modes: external (system trigger), self (ACDC-local
  // discriminators) or the coincidence of both.
  typedef enum logic [1:0] {
    TRIG_EXTERNAL = 2'd0,
    TRIG_SELF     = 2'd1,
    TRIG_COINC    = 2'd2,
    TRIG_OFF      = 2'd3
  } trig_mode_e;

  typedef struct packed {
    trig_mode_e              mode;
    logic [N_CH-1:0]         ch_mask;   // 1 = channel may trigger
    logic [11:0]             window;    // coincidence window, clock cycles
  } trig_cfg_t;

  // Configuration word: {addr[3:0], value[11:0]}
  localparam logic [3:0] CFG_MODE    = 4'd0;
  localparam logic [3:0] CFG_MASK0   = 4'd1;  // channels 11..0
  localparam logic [3:0] CFG_MASK1   = 4'd2;  // channels 23..12
  localparam logic [3:0] CFG_MASK2   = 4'd3;  // channels 29..24
  localparam logic [3:0] CFG_WINDOW  = 4'd4;
  localparam logic [3:0] CFG_THRESH0 = 4'd5;  // 5..9: threshold of chip 0..4
  localparam logic [3:0] CFG_CMD     = 4'd10; // bit 0: software trigger

  // Data packet words: {tag[3:0], payload[11:0]}
  localparam logic [3:0] TAG_HEADER  = 4'hE;  // payload = event number
  localparam logic [3:0] TAG_TRAILER = 4'hF;  // payload = event number
  // sample words carry the chip number (0..4) as tag and the ADC value

  // Word delivered by the central card to the host readout interface
  typedef struct packed {
    logic [2:0]        board;
    logic [WORD_W-1:0] word;
    logic              last;   // trailer of a packet
  } host_word_t;

  localparam int unsigned N_ACC = 8;  // central cards (slaves) per crate master

  // Word delivered by the crate master: card, board, packet word
  typedef struct packed {
    logic [2:0]        card;
    logic [2:0]        board;
    logic [WORD_W-1:0] word;
    logic              last;
  } crate_word_t;

endpackage
