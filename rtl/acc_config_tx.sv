// acc_config_tx: sends configuration words from the host to the ACDC
// boards over their serial config lines.
//
// A host command is a board mask and one 16-bit configuration word
// (valid/ready). It is accepted when every board's serializer is idle and
// is then sent, as one serial frame of 18 clocks, on the config line of
// every board whose mask bit is set, all at once. cmd_ready is low while
// any frame is in flight. n_sent counts accepted commands.
// Programming the ACDC boards over the serial link from the central card
// follows the published system; the command format and the broadcast to
// several boards are this design's own.
module acc_config_tx
  import daq_pkg::*;
#(
  parameter int unsigned N_ACDC_P = N_ACDC
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                cmd_valid,
  output logic                cmd_ready,
  input  logic [N_ACDC_P-1:0] cmd_mask,
  input  logic [WORD_W-1:0]   cmd_word,
  output logic [N_ACDC_P-1:0] cfg_line,
  output logic [15:0]         n_sent
);
  logic [N_ACDC_P-1:0] tx_ready;

  assign cmd_ready = &tx_ready;

  for (genvar b = 0; b < N_ACDC_P; b++) begin : g_brd
    serial_tx #(.W(WORD_W)) u_tx (
      .clk, .rst_n,
      .valid(cmd_valid && cmd_ready && cmd_mask[b]),
      .ready(tx_ready[b]), .data(cmd_word), .line(cfg_line[b]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) n_sent <= '0;
    else if (cmd_valid && cmd_ready) n_sent <= n_sent + 1'b1;
  end
endmodule
