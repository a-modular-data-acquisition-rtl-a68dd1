// daq_system: one central card (ACC) with its N_ACDC_P ACDC front-end
// boards, 30 PSEC4 channels each (240 channels for eight boards).
//
// The ACC and each ACDC FPGA are joined by the lines of their CAT5 link:
// config, system trigger and flow-control flag towards the board; two
// data lines, board trigger and busy flag back. All FPGAs run on the one
// system clock, which on the real boards is sent over the link and
// jitter-cleaned on each ACDC. The PSEC4 chips, the threshold DACs and the
// host readout interface are outside: their signals are ports here,
// indexed by board.
// Timing: a configuration word reaches the boards 20 clocks after the host
// command; an accepted event becomes a packet of 2 + 30*N_CELLS_P words that
// takes about 9 clocks per word over the two data lines; the central card
// forwards packets whole, one board after another, from per-board FIFOs of
// FIFO_DEPTH words.
module daq_system
  import daq_pkg::*;
#(
  parameter int unsigned N_ACDC_P  = N_ACDC,
  parameter int unsigned N_CELLS_P = N_CELLS,
  parameter int unsigned FIFO_DEPTH = 8192
) (
  input  logic                clk,
  input  logic                rst_n,
  // PSEC4 chips and board inputs, per ACDC board
  input  logic [N_CH-1:0]     self_bits    [N_ACDC_P],
  input  logic [N_ACDC_P-1:0] onboard_trig,
  output logic [N_PSEC4-1:0]  psec4_trig   [N_ACDC_P],
  output logic [2:0]          psec4_ch     [N_ACDC_P],
  output logic [7:0]          psec4_cell   [N_ACDC_P],
  input  logic [ADC_BITS-1:0] psec4_data   [N_ACDC_P][N_PSEC4],
  output logic [11:0]         threshold    [N_ACDC_P][N_PSEC4],
  // central card
  input  logic                slave_mode,
  input  logic                master_trig,
  output logic                card_trig,
  input  logic                ext_trig,
  input  logic                host_trig,
  input  logic [2:0]          trig_src_en,
  input  logic [N_ACDC_P-1:0] trig_board_mask,
  input  logic                cmd_valid,
  output logic                cmd_ready,
  input  logic [N_ACDC_P-1:0] cmd_mask,
  input  logic [WORD_W-1:0]   cmd_word,
  output logic                host_valid,
  input  logic                host_ready,
  output host_word_t          host_word,
  // status
  output logic [N_ACDC_P-1:0] busy_status,
  output logic [15:0]         n_global,
  output logic [15:0]         n_packets,
  output logic [7:0]          link_errs,
  output logic [15:0]         n_kept       [N_ACDC_P],
  output logic [15:0]         n_dropped    [N_ACDC_P]
);
  logic [N_ACDC_P-1:0] cfg_line, link_en, board_trig, board_busy;
  logic                sys_trig;
  logic [1:0]          data_line [N_ACDC_P];

  acc_fpga #(.N_ACDC_P(N_ACDC_P), .DEPTH(FIFO_DEPTH)) u_acc (
    .clk, .rst_n, .cfg_line, .sys_trig, .link_en, .data_line,
    .board_trig, .board_busy, .slave_mode, .master_trig, .card_trig, .ext_trig, .host_trig, .trig_src_en,
    .trig_board_mask, .cmd_valid, .cmd_ready, .cmd_mask, .cmd_word,
    .host_valid, .host_ready, .host_word, .busy_status, .n_global,
    .n_packets, .link_errs);

  for (genvar b = 0; b < N_ACDC_P; b++) begin : g_acdc
    acdc_fpga #(.N_CELLS_P(N_CELLS_P)) u_acdc (
      .clk, .rst_n,
      .cfg_line(cfg_line[b]), .sys_trig, .link_en(link_en[b]),
      .data_line(data_line[b]), .board_trig_out(board_trig[b]),
      .busy(board_busy[b]),
      .self_bits(self_bits[b]), .onboard_trig(onboard_trig[b]),
      .psec4_trig(psec4_trig[b]), .psec4_ch(psec4_ch[b]),
      .psec4_cell(psec4_cell[b]), .psec4_data(psec4_data[b]),
      .threshold(threshold[b]),
      .event_num(), .n_kept(n_kept[b]), .n_dropped(n_dropped[b]));
  end
endmodule
