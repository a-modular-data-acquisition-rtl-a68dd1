// acm_master: logic of the crate master (a central card configured as
// master) over up to N_ACC_P slave central cards.
//
// Trigger: the master registers the global trigger with an acc_trigger
// whose "board" inputs are the slaves' card_trig lines (each the OR of that
// card's board triggers), and drives master_trig, the system trigger that
// every slave passes on to its ACDC boards. Sources and their enables are
// those of acc_trigger: external input, host request, masked card
// triggers.
// Data: each slave delivers its host stream of whole, board-tagged packets
// (valid/ready). The master serves one slave at a time, a whole packet at
// a time, round-robin from the slave after the one served last, adds the
// card number and forwards the words one per clock while out_ready is
// high; choosing the next slave costs one clock. n_packets counts the
// packets forwarded.
// A master that generates the system clock and trigger for up to eight
// central cards and receives their data follows the published system;
// how the slaves' data reach the master (here a plain word stream for each
// slave standing for the optical or daisy-chained links) and the merging
// policy are this design's own.
module acm_master
  import daq_pkg::*;
#(
  parameter int unsigned N_ACC_P = N_ACC
) (
  input  logic               clk,
  input  logic               rst_n,
  // slaves
  input  logic [N_ACC_P-1:0] s_valid,
  output logic [N_ACC_P-1:0] s_ready,
  input  host_word_t         s_word [N_ACC_P],
  input  logic [N_ACC_P-1:0] card_trig,
  output logic               master_trig,
  // trigger settings and inputs
  input  logic [2:0]         trig_src_en,
  input  logic [N_ACC_P-1:0] trig_card_mask,
  input  logic               ext_trig,
  input  logic               host_trig,
  // output stream to the host
  output logic               out_valid,
  input  logic               out_ready,
  output crate_word_t        out_word,
  output logic [15:0]        n_global,
  output logic [15:0]        n_packets
);
  localparam int unsigned CW = (N_ACC_P > 1) ? $clog2(N_ACC_P) : 1;
  logic          locked;
  logic [CW-1:0] cur, next;
  logic          any_valid;

  acc_trigger #(.N_ACDC_P(N_ACC_P)) u_trig (
    .clk, .rst_n, .src_en(trig_src_en), .board_mask(trig_card_mask),
    .ext_trig, .host_trig, .board_trig(card_trig), .sys_trig(master_trig),
    .n_global);

  always_comb begin
    next      = cur;
    any_valid = 1'b0;
    for (int k = N_ACC_P; k >= 1; k--) begin
      if (s_valid[(int'(cur) + k) % N_ACC_P]) begin
        next      = CW'((int'(cur) + k) % N_ACC_P);
        any_valid = 1'b1;
      end
    end
  end

  assign out_valid      = locked && s_valid[cur];
  assign out_word.card  = 3'(cur);
  assign out_word.board = s_word[cur].board;
  assign out_word.word  = s_word[cur].word;
  assign out_word.last  = s_word[cur].last;

  always_comb begin
    s_ready = '0;
    if (locked) s_ready[cur] = out_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      locked    <= 1'b0;
      cur       <= CW'(N_ACC_P - 1);
      n_packets <= '0;
    end else if (!locked) begin
      if (any_valid) begin
        locked <= 1'b1;
        cur    <= next;
      end
    end else if (out_valid && out_ready && s_word[cur].last) begin
      locked    <= 1'b0;
      n_packets <= n_packets + 1'b1;
    end
  end
endmodule
