// acdc_fpga: control FPGA of an ACDC front-end board (five PSEC4 chips,
// 30 channels).
//
// Link side (the 40 MHz clock and seven LVDS lines to the central card):
// inputs cfg_line (serial config data), sys_trig (system trigger) and
// link_en (system interface flag, used here as flow control); outputs two
// serial data lines, board_trig_out and busy (system interface flag back).
// Chip side: the 30 discriminator bits in, the five PSEC4 trigger lines
// out, the channel/cell read address out, five ADC values in, and the
// five threshold settings out to the threshold DACs.
// Inside, serial_rx feeds acdc_config_regs; acdc_trigger decides when the
// chips stop and an event is kept; acdc_readout then walks the sample array
// and sends the packet over two serial_tx, releasing the trigger when done.
// Everything runs on the one link clock.
// The signal set follows the published trigger/clock diagram of the ACDC;
// the meaning given to the two interface flags is this design's own.
module acdc_fpga
  import daq_pkg::*;
#(
  parameter int unsigned N_CELLS_P = N_CELLS
) (
  input  logic                clk,
  input  logic                rst_n,
  // central-card link
  input  logic                cfg_line,
  input  logic                sys_trig,
  input  logic                link_en,
  output logic [1:0]          data_line,
  output logic                board_trig_out,
  output logic                busy,
  // PSEC4 chips and board
  input  logic [N_CH-1:0]     self_bits,
  input  logic                onboard_trig,
  output logic [N_PSEC4-1:0]  psec4_trig,
  output logic [2:0]          psec4_ch,
  output logic [7:0]          psec4_cell,
  input  logic [ADC_BITS-1:0] psec4_data [N_PSEC4],
  output logic [11:0]         threshold [N_PSEC4],
  // status
  output logic [11:0]         event_num,
  output logic [15:0]         n_kept,
  output logic [15:0]         n_dropped
);
  logic              cfg_valid, cfg_ferr, soft_trig;
  logic [WORD_W-1:0] cfg_word;
  trig_cfg_t         trig_cfg;
  logic [7:0]        bad_addr;
  logic              event_start, readout_done;
  logic [1:0]        lane_valid, lane_ready;
  logic [WORD_W-1:0] lane_data;

  serial_rx #(.W(WORD_W)) u_cfg_rx (
    .clk, .rst_n, .line(cfg_line),
    .valid(cfg_valid), .data(cfg_word), .frame_err(cfg_ferr));

  acdc_config_regs u_regs (
    .clk, .rst_n, .cfg_valid, .cfg_word,
    .trig_cfg, .threshold, .soft_trig, .bad_addr);

  acdc_trigger u_trig (
    .clk, .rst_n,
    .mode(trig_cfg.mode), .ch_mask(trig_cfg.ch_mask), .window(trig_cfg.window),
    .self_bits, .sys_trig, .onboard_trig, .soft_trig,
    .readout_done, .psec4_trig, .board_trig_out,
    .event_start, .busy, .n_kept, .n_dropped);

  acdc_readout #(.N_CELLS_P(N_CELLS_P)) u_ro (
    .clk, .rst_n, .event_start, .link_en,
    .psec4_ch, .psec4_cell, .psec4_data,
    .lane_valid, .lane_ready, .lane_data,
    .done(readout_done), .event_num);

  for (genvar l = 0; l < 2; l++) begin : g_lane
    serial_tx #(.W(WORD_W)) u_tx (
      .clk, .rst_n, .valid(lane_valid[l]), .ready(lane_ready[l]),
      .data(lane_data), .line(data_line[l]));
  end
endmodule
