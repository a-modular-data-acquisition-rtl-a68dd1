// acdc_trigger: trigger decision of an ACDC front-end board.
//
// The 30 discriminator (self-trigger) bits of the five PSEC4 chips are
// synchronised (two flip-flops), masked with the programmable channel mask
// and ORed into the board-local trigger, which is also sent to the central
// card as board_trig_out. A rising edge of the local trigger, or of the
// external trigger (system trigger from the central card ORed with the
// on-board trigger input), starts an event according to the mode:
//   TRIG_EXTERNAL  external edge only
//   TRIG_SELF      local edge only
//   TRIG_COINC     a local edge stops the PSEC4 chips at once (their
//                  sampling array is overwritten every 25 ns at 10.24 GSa/s,
//                  shorter than a global-trigger latency) and the event is
//                  kept only if an external edge follows within `window`
//                  cycles (at least 1); otherwise the chips are re-armed.
//                  An external edge in the same cycle as the local edge
//                  also counts.
//   TRIG_OFF       no trigger at all, the software trigger included
// A software trigger (one-cycle pulse) starts an event in every mode but
// TRIG_OFF. The five PSEC4 trigger outputs are high from the first trigger
// edge until readout_done; event_start pulses once per kept event, one
// cycle after the deciding edge reaches the inputs (three cycles after a
// discriminator edge because of the synchroniser).
// Three cycles of a 40 MHz clock are 75 ns, longer than the 25 ns the
// sampling array holds a pulse. So in the self and coincidence modes a
// combinational fast path raises the PSEC4 trigger lines as soon as an
// unmasked discriminator bit rises, with no clock in between. The bit and
// its two synchroniser copies keep the lines high until the state machine
// has taken the event (three edges later). The fast path is enabled only
// while armed and while the registered local trigger is low, so a channel
// stuck high cannot hold the chips. A discriminator pulse that no clock
// edge samples stops the chips only for its own length and starts no event.
// The three modes, the channel mask, the coincidence window and the per-
// chip trigger lines follow the published system; the OR of masked
// channels, the fast path, the local-then-system coincidence order and
// holding the chips until readout are this design's choices.
module acdc_trigger
  import daq_pkg::*;
#(
  parameter int unsigned N_CH_P    = N_CH,
  parameter int unsigned N_PSEC4_P = N_PSEC4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  trig_mode_e           mode,
  input  logic [N_CH_P-1:0]    ch_mask,
  input  logic [11:0]          window,
  input  logic [N_CH_P-1:0]    self_bits,     // PSEC4 discriminator outputs
  input  logic                 sys_trig,      // system trigger from ACC
  input  logic                 onboard_trig,  // on-board trigger input
  input  logic                 soft_trig,     // one-cycle software trigger
  input  logic                 readout_done,  // one-cycle pulse
  output logic [N_PSEC4_P-1:0] psec4_trig,    // stop sampling, per chip
  output logic                 board_trig_out,
  output logic                 event_start,
  output logic                 busy,
  output logic [15:0]          n_kept,
  output logic [15:0]          n_dropped      // coincidence timeouts
);
  typedef enum logic [1:0] {ARMED, WAIT_SYS, HOLD} state_e;
  state_e state;

  logic [N_CH_P-1:0] sync1, sync2;
  logic local_trig, local_q, ext_in, ext_q;
  logic local_rise, ext_rise;
  logic [11:0] timer;

  assign local_trig = |(sync2 & ch_mask);
  assign local_rise = local_trig & ~local_q;
  assign ext_in     = sys_trig | onboard_trig;
  assign ext_rise   = ext_in & ~ext_q;

  // fast path: unmasked discriminator bit, raw or in the synchroniser
  logic fast_en, fast_hit;
  assign fast_en  = (state == ARMED) && !local_q &&
                    (mode == TRIG_SELF || mode == TRIG_COINC);
  assign fast_hit = fast_en && |((self_bits | sync1 | sync2) & ch_mask);

  assign busy           = (state != ARMED);
  assign psec4_trig     = {N_PSEC4_P{busy | fast_hit}};
  assign board_trig_out = local_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sync1       <= '0;
      sync2       <= '0;
      local_q     <= 1'b0;
      ext_q       <= 1'b0;
      state       <= ARMED;
      timer       <= '0;
      event_start <= 1'b0;
      n_kept      <= '0;
      n_dropped   <= '0;
    end else begin
      sync1       <= self_bits;
      sync2       <= sync1;
      local_q     <= local_trig;
      ext_q       <= ext_in;
      event_start <= 1'b0;
      unique case (state)
        ARMED: begin
          if (mode != TRIG_OFF) begin
            if (soft_trig ||
                (mode == TRIG_EXTERNAL && ext_rise) ||
                (mode == TRIG_SELF && local_rise) ||
                (mode == TRIG_COINC && local_rise && ext_rise)) begin
              state       <= HOLD;
              event_start <= 1'b1;
              n_kept      <= n_kept + 1'b1;
            end else if (mode == TRIG_COINC && local_rise) begin
              state <= WAIT_SYS;
              timer <= window;
            end
          end
        end
        WAIT_SYS: begin
          if (ext_rise || soft_trig) begin
            state       <= HOLD;
            event_start <= 1'b1;
            n_kept      <= n_kept + 1'b1;
          end else if (timer <= 12'd1) begin
            state     <= ARMED;
            n_dropped <= n_dropped + 1'b1;
          end else begin
            timer <= timer - 1'b1;
          end
        end
        HOLD: if (readout_done) state <= ARMED;
        default: state <= ARMED;
      endcase
    end
  end
endmodule
