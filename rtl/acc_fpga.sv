// acc_fpga: FPGA logic of the ACC (central card) serving up to N_ACDC_P
// ACDC boards.
//
// Per board it drives the serial config line, the system-trigger line and
// the flow-control flag, and receives the two serial data lines, the board
// trigger and the busy flag. acc_link_rx deserialises each board's data
// into a FIFO, acc_event_builder merges the boards' packets into the host
// word stream, acc_trigger registers the global trigger and fans the
// system trigger out to all boards, and acc_config_tx sends host
// configuration words to the selected boards. The host side is a plain
// valid/ready stream; the USB, Ethernet, SFP and VME interfaces that would
// carry it are outside this logic. trig_src_en and trig_board_mask are the
// central card's own trigger settings. With slave_mode set the card is a
// slave of a crate master: the system trigger to its boards is the
// master's trigger line (delayed one clock) instead of its own, and
// card_trig, the OR of its masked board triggers, goes up to the master,
// which reads the host stream of every slave. Without slave_mode, card_trig
// carries the card's own system trigger instead, so one card can act as
// master to another (the two-card master/slave set-up of the published
// test-beam system). Each board's FIFO holds DEPTH words;
// the default of 8192 holds a whole 7682-word packet, so all boards can send
// an event at full link speed at once while the builder forwards one
// packet after another.
// Eight boards per card and the link signal set follow the published
// system; the host stream and the internal organisation are this design's.
module acc_fpga
  import daq_pkg::*;
#(
  parameter int unsigned N_ACDC_P = N_ACDC,
  parameter int unsigned DEPTH    = 8192
) (
  input  logic                clk,
  input  logic                rst_n,
  // ACDC links
  output logic [N_ACDC_P-1:0] cfg_line,
  output logic                sys_trig,       // to every board
  output logic [N_ACDC_P-1:0] link_en,
  input  logic [1:0]          data_line [N_ACDC_P],
  input  logic [N_ACDC_P-1:0] board_trig,
  input  logic [N_ACDC_P-1:0] board_busy,
  // master/slave
  input  logic                slave_mode,
  input  logic                master_trig,    // system trigger from the master
  output logic                card_trig,      // OR of the board triggers, to the master
  // trigger
  input  logic                ext_trig,
  input  logic                host_trig,
  input  logic [2:0]          trig_src_en,
  input  logic [N_ACDC_P-1:0] trig_board_mask,
  // host configuration commands
  input  logic                cmd_valid,
  output logic                cmd_ready,
  input  logic [N_ACDC_P-1:0] cmd_mask,
  input  logic [WORD_W-1:0]   cmd_word,
  // host data stream
  output logic                host_valid,
  input  logic                host_ready,
  output host_word_t          host_word,
  // status
  output logic [N_ACDC_P-1:0] busy_status,
  output logic [15:0]         n_global,
  output logic [15:0]         n_packets,
  output logic [7:0]          link_errs
);
  logic [N_ACDC_P-1:0] rx_valid, rx_ready;
  logic [WORD_W-1:0]   rx_data [N_ACDC_P];
  logic [7:0]          order_errs [N_ACDC_P];
  logic [7:0]          frame_errs [N_ACDC_P];
  logic [7:0]          overflows  [N_ACDC_P];

  for (genvar b = 0; b < N_ACDC_P; b++) begin : g_link
    acc_link_rx #(.DEPTH(DEPTH)) u_link (
      .clk, .rst_n, .data_line(data_line[b]), .link_en(link_en[b]),
      .out_valid(rx_valid[b]), .out_ready(rx_ready[b]), .out_data(rx_data[b]),
      .order_errs(order_errs[b]), .frame_errs(frame_errs[b]),
      .overflows(overflows[b]));
  end

  // errors of all links summed
  always_comb begin
    link_errs = '0;
    for (int b = 0; b < N_ACDC_P; b++)
      link_errs = link_errs + order_errs[b] + frame_errs[b] + overflows[b];
  end

  acc_event_builder #(.N_ACDC_P(N_ACDC_P)) u_evb (
    .clk, .rst_n, .in_valid(rx_valid), .in_ready(rx_ready), .in_data(rx_data),
    .host_valid, .host_ready, .host_word, .packets(n_packets));

  logic local_sys_trig;

  acc_trigger #(.N_ACDC_P(N_ACDC_P)) u_trig (
    .clk, .rst_n, .src_en(trig_src_en), .board_mask(trig_board_mask),
    .ext_trig, .host_trig, .board_trig, .sys_trig(local_sys_trig), .n_global);

  // a slave passes the master's system trigger on to its boards; it is
  // re-timed by one register like the card's own trigger
  logic master_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) master_q <= 1'b0;
    else        master_q <= master_trig;
  end
  assign sys_trig  = slave_mode ? master_q : local_sys_trig;
  // the card's one trigger output: a slave reports its masked board
  // triggers to the master; a master drives its system trigger, so that a
  // second card can be slaved to it directly
  assign card_trig = slave_mode ? |(board_trig & trig_board_mask) : local_sys_trig;

  acc_config_tx #(.N_ACDC_P(N_ACDC_P)) u_cfg (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd_mask, .cmd_word,
    .cfg_line, .n_sent());

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) busy_status <= '0;
    else        busy_status <= board_busy;
  end
endmodule
