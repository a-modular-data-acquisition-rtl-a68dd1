// acc_event_builder: merges the packets of up to N_ACDC_P ACDC boards into
// the single word stream the central card sends to its host interface.
//
// Each board delivers its words on a valid/ready stream (from its
// acc_link_rx). The builder serves one board at a time, a whole packet at a
// time: in IDLE it picks the next board with a word waiting, searching
// round-robin from the board after the one served last, and then forwards
// that board's words, tagged with the board number, until it has forwarded
// a trailer word (tag TAG_TRAILER), which is marked last. Forwarding is one
// word per clock when the host is ready; choosing a board costs one clock.
// packets counts the packets forwarded.
// Serving up to eight boards follows the published central card; the
// round-robin, packet-atomic policy is this design's own.
module acc_event_builder
  import daq_pkg::*;
#(
  parameter int unsigned N_ACDC_P = N_ACDC
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [N_ACDC_P-1:0] in_valid,
  output logic [N_ACDC_P-1:0] in_ready,
  input  logic [WORD_W-1:0]   in_data [N_ACDC_P],
  output logic                host_valid,
  input  logic                host_ready,
  output host_word_t          host_word,
  output logic [15:0]         packets
);
  localparam int unsigned BW = (N_ACDC_P > 1) ? $clog2(N_ACDC_P) : 1;
  logic          locked;
  logic [BW-1:0] cur;      // board being served
  logic [BW-1:0] next;     // round-robin choice
  logic          any_valid;
  logic          is_last;

  always_comb begin
    next      = cur;
    any_valid = 1'b0;
    for (int k = N_ACDC_P; k >= 1; k--) begin
      int unsigned b;
      b = (int'(cur) + k) % N_ACDC_P;
      if (in_valid[b]) begin
        next      = BW'(b);
        any_valid = 1'b1;
      end
    end
  end

  assign is_last          = (in_data[cur][15:12] == TAG_TRAILER);
  assign host_valid       = locked && in_valid[cur];
  assign host_word.board  = 3'(cur);
  assign host_word.word   = in_data[cur];
  assign host_word.last   = is_last;

  always_comb begin
    in_ready = '0;
    if (locked) in_ready[cur] = host_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      locked  <= 1'b0;
      cur     <= BW'(N_ACDC_P - 1);
      packets <= '0;
    end else if (!locked) begin
      if (any_valid) begin
        locked <= 1'b1;
        cur    <= next;
      end
    end else if (host_valid && host_ready && is_last) begin
      locked  <= 1'b0;
      packets <= packets + 1'b1;
    end
  end
endmodule
