// daq_crate: a crate master with N_ACC_P slave central cards, each serving
// N_ACDC_P ACDC boards: 8 x 8 x 30 = 1920 PSEC4 channels at the defaults.
//
// Every slave is a daq_system (central card plus its boards) run in slave
// mode: its boards take their system trigger from the master's trigger
// line, and its card_trig (OR of its board triggers) goes up to the
// master. acm_master merges the slaves' packet streams into one stream of
// words tagged with card and board. Host configuration commands carry a
// card mask and a board mask and reach every selected card's configuration
// transmitter at once; the card-level trigger settings are per card.
// PSEC4 signals are ports indexed [card][board]. One clock drives all
// FPGAs (the system clock is distributed by the master on the real
// system).
// The two-level pyramid (one master, up to eight central cards, eight
// boards each) follows the published system; the command fan-out and the
// data path from the slaves to the master are this design's own.
module daq_crate
  import daq_pkg::*;
#(
  parameter int unsigned N_ACC_P    = N_ACC,
  parameter int unsigned N_ACDC_P   = N_ACDC,
  parameter int unsigned N_CELLS_P  = N_CELLS,
  parameter int unsigned FIFO_DEPTH = 8192
) (
  input  logic                clk,
  input  logic                rst_n,
  // PSEC4 chips and board inputs, per card and board
  input  logic [N_CH-1:0]     self_bits    [N_ACC_P][N_ACDC_P],
  input  logic [N_ACDC_P-1:0] onboard_trig [N_ACC_P],
  output logic [N_PSEC4-1:0]  psec4_trig   [N_ACC_P][N_ACDC_P],
  output logic [2:0]          psec4_ch     [N_ACC_P][N_ACDC_P],
  output logic [7:0]          psec4_cell   [N_ACC_P][N_ACDC_P],
  input  logic [ADC_BITS-1:0] psec4_data   [N_ACC_P][N_ACDC_P][N_PSEC4],
  output logic [11:0]         threshold    [N_ACC_P][N_ACDC_P][N_PSEC4],
  // crate master trigger
  input  logic                ext_trig,
  input  logic                host_trig,
  input  logic [2:0]          trig_src_en,
  input  logic [N_ACC_P-1:0]  trig_card_mask,
  // slave cards: board-trigger masks (for their card_trig) and own inputs
  input  logic [N_ACDC_P-1:0] trig_board_mask [N_ACC_P],
  input  logic [N_ACC_P-1:0]  card_ext_trig,
  // host configuration commands
  input  logic                cmd_valid,
  output logic                cmd_ready,
  input  logic [N_ACC_P-1:0]  cmd_card_mask,
  input  logic [N_ACDC_P-1:0] cmd_mask,
  input  logic [WORD_W-1:0]   cmd_word,
  // host data stream
  output logic                out_valid,
  input  logic                out_ready,
  output crate_word_t         out_word,
  // status
  output logic [N_ACDC_P-1:0] busy_status [N_ACC_P],
  output logic [7:0]          link_errs   [N_ACC_P],
  output logic [15:0]         n_kept      [N_ACC_P][N_ACDC_P],
  output logic [15:0]         n_dropped   [N_ACC_P][N_ACDC_P],
  output logic [15:0]         n_global,
  output logic [15:0]         n_packets
);
  logic                master_trig;
  logic [N_ACC_P-1:0]  card_trig, s_valid, s_ready, c_ready;
  host_word_t          s_word [N_ACC_P];
  logic [15:0]         c_global [N_ACC_P];
  logic [15:0]         c_packets [N_ACC_P];

  assign cmd_ready = &c_ready;

  for (genvar c = 0; c < N_ACC_P; c++) begin : g_card
    daq_system #(.N_ACDC_P(N_ACDC_P), .N_CELLS_P(N_CELLS_P), .FIFO_DEPTH(FIFO_DEPTH)) u_card (
      .clk, .rst_n,
      .self_bits(self_bits[c]), .onboard_trig(onboard_trig[c]),
      .psec4_trig(psec4_trig[c]), .psec4_ch(psec4_ch[c]), .psec4_cell(psec4_cell[c]),
      .psec4_data(psec4_data[c]), .threshold(threshold[c]),
      .slave_mode(1'b1), .master_trig, .card_trig(card_trig[c]),
      .ext_trig(card_ext_trig[c]), .host_trig(1'b0), .trig_src_en(3'b000),
      .trig_board_mask(trig_board_mask[c]),
      .cmd_valid(cmd_valid && cmd_ready && cmd_card_mask[c]), .cmd_ready(c_ready[c]),
      .cmd_mask, .cmd_word,
      .host_valid(s_valid[c]), .host_ready(s_ready[c]), .host_word(s_word[c]),
      .busy_status(busy_status[c]), .n_global(c_global[c]), .n_packets(c_packets[c]),
      .link_errs(link_errs[c]), .n_kept(n_kept[c]), .n_dropped(n_dropped[c]));
  end

  acm_master #(.N_ACC_P(N_ACC_P)) u_acm (
    .clk, .rst_n, .s_valid, .s_ready, .s_word, .card_trig, .master_trig,
    .trig_src_en, .trig_card_mask, .ext_trig, .host_trig,
    .out_valid, .out_ready, .out_word, .n_global, .n_packets);
endmodule
