// serial_tx: serializer for one LVDS line of the ACC-ACDC CAT5 link.
//
// A word offered on valid/ready is sent as a frame: one start bit (1), the
// W data bits MSB first, and one stop bit (0); the idle line is 0. One bit
// leaves per clock, so a word takes W+2 cycles and a new word can follow
// immediately after the stop bit. ready is high while no frame is being
// sent; a word is taken in the cycle valid && ready.
// The published system only says the link carries a custom serial protocol
// at up to 1.2 Gb/s per line; the frame format is this design's own.
module serial_tx #(
  parameter int unsigned W = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         valid,
  output logic         ready,
  input  logic [W-1:0] data,
  output logic         line
);
  localparam int unsigned FRAME = W + 2;
  logic [FRAME-1:0]         shreg;
  logic [$clog2(FRAME+1)-1:0] left;

  assign ready = (left == '0);
  assign line  = shreg[FRAME-1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      shreg <= '0;
      left  <= '0;
    end else if (valid && ready) begin
      shreg <= {1'b1, data, 1'b0};
      left  <= FRAME[$bits(left)-1:0];
    end else if (left != '0) begin
      shreg <= {shreg[FRAME-2:0], 1'b0};
      left  <= left - 1'b1;
    end
  end
endmodule
