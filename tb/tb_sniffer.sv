// tb_sniffer: testbench-only decoder of the serial frame format (idle 0,
// start bit 1, W data bits MSB first, stop bit 0). Written independently of
// serial_rx as a reference: it counts the clocks since the start bit and
// picks each bit by position. got pulses with the word after the stop
// bit; bad pulses if the stop bit is 1.
module tb_sniffer #(
  parameter int W = 16
) (
  input  logic         clk,
  input  logic         line,
  output logic         got,
  output logic [W-1:0] word,
  output logic         bad
);
  int pos = -1;           // -1: idle, else bit index within the frame
  logic [W-1:0] acc = '0;
  initial begin got = 0; bad = 0; word = '0; end
  always @(posedge clk) begin
    got <= 0; bad <= 0;
    if (pos < 0) begin
      if (line) pos <= 1;
    end else if (pos <= W) begin
      acc[W - pos] <= line;
      pos <= pos + 1;
    end else begin
      if (line) bad <= 1;
      else begin got <= 1; word <= acc; end
      pos <= -1;
    end
  end
endmodule
