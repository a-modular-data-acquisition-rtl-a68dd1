// serial_rx: deserializer for one LVDS line of the ACC-ACDC link.
//
// Waits for a start bit (1) on the idle-low line, shifts in W data bits MSB
// first and checks the stop bit (0). valid pulses for one cycle in the
// cycle after the stop bit is sampled, with the word on data; frame_err
// pulses instead if the stop bit is 1. Both link ends run on the
// distributed system clock, so the line is sampled once per clock with no
// clock recovery (this design's assumption; the frame format matches
// serial_tx and is this design's own).
module serial_rx #(
  parameter int unsigned W = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         line,
  output logic         valid,
  output logic [W-1:0] data,
  output logic         frame_err
);
  logic                     busy;
  logic [$clog2(W+2)-1:0]   cnt;     // bits still to sample incl. stop bit
  logic [W-1:0]             shreg;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      cnt       <= '0;
      shreg     <= '0;
      data      <= '0;
      valid     <= 1'b0;
      frame_err <= 1'b0;
    end else begin
      valid     <= 1'b0;
      frame_err <= 1'b0;
      if (!busy) begin
        if (line) begin
          busy <= 1'b1;
          cnt  <= ($bits(cnt))'(W + 1);
        end
      end else if (cnt > 1) begin
        shreg <= {shreg[W-2:0], line};
        cnt   <= cnt - 1'b1;
      end else begin
        busy <= 1'b0;
        cnt  <= '0;
        if (!line) begin
          valid <= 1'b1;
          data  <= shreg;
        end else begin
          frame_err <= 1'b1;
        end
      end
    end
  end
endmodule
