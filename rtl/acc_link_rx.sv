// acc_link_rx: central-card end of the data path from one ACDC board.
//
// Two serial_rx deserialise the two serial data lines. The ACDC sends even
// words on line 0 and odd words on line 1, each word starting at least one
// clock after the previous one and all frames having the same length, so
// the words complete in order and never in the same cycle; they are pushed
// into one DEPTH-word FIFO in arrival order. A word that arrives on the
// other line than the alternation expects is still kept but counted in
// order_errs. The FIFO is read with a valid/ready stream (valid = not
// empty). link_en, sent back to the ACDC on the System interface flag, is
// high while at least 6 entries are free, enough for the words already in
// flight when it drops. Framing errors and FIFO overflows are counted.
// The two data lines follow the published ACDC link; the lane order, the
// FIFO and the use of the flag for flow control are this design's own.
module acc_link_rx
  import daq_pkg::*;
#(
  parameter int unsigned DEPTH = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [1:0]        data_line,
  output logic              link_en,
  output logic              out_valid,
  input  logic              out_ready,
  output logic [WORD_W-1:0] out_data,
  output logic [7:0]        order_errs,
  output logic [7:0]        frame_errs,
  output logic [7:0]        overflows
);
  localparam int unsigned CW = $clog2(DEPTH + 1);
  logic [1:0]        rx_valid, rx_ferr;
  logic [WORD_W-1:0] rx_data [2];
  logic              expect_lane;
  logic              push, empty, full;
  logic [WORD_W-1:0] push_data;
  logic [CW-1:0]     count;

  for (genvar l = 0; l < 2; l++) begin : g_lane
    serial_rx #(.W(WORD_W)) u_rx (
      .clk, .rst_n, .line(data_line[l]),
      .valid(rx_valid[l]), .data(rx_data[l]), .frame_err(rx_ferr[l]));
  end

  assign push      = |rx_valid;
  assign push_data = rx_valid[1] ? rx_data[1] : rx_data[0];

  sync_fifo #(.W(WORD_W), .DEPTH(DEPTH)) u_fifo (
    .clk, .rst_n, .push, .din(push_data), .pop(out_ready),
    .dout(out_data), .empty, .full, .count, .overflows);

  assign out_valid = !empty;
  assign link_en   = (count + CW'(6) <= CW'(DEPTH));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      expect_lane <= 1'b0;
      order_errs  <= '0;
      frame_errs  <= '0;
    end else begin
      if (push) begin
        expect_lane <= ~rx_valid[1];
        if (!rx_valid[expect_lane]) order_errs <= order_errs + 1'b1;
      end
      if (|rx_ferr) frame_errs <= frame_errs + 1'b1;
    end
  end

  // words of the two lines never complete in the same cycle
  a_no_collision: assert property (@(posedge clk) disable iff (!rst_n) !(&rx_valid));
endmodule
