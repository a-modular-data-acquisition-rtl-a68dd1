// acdc_config_regs: ACDC configuration registers loaded over the serial
// config line from the central card.
//
// Each received 16-bit word is {addr[3:0], value[11:0]} (encodings in
// daq_pkg). It sets the trigger mode, the 30-bit trigger channel mask (in
// three 12/12/6-bit pieces), the coincidence window between the local and
// the system trigger, and the threshold setting of each of the five PSEC4
// chips; address CFG_CMD with value bit 0 set issues a one-cycle software
// trigger. A word takes effect in the clock after cfg_valid. Unknown
// addresses are ignored and counted in bad_addr.
// That the channel mask, coincidence window and per-chip thresholds are set
// over the serial link follows the published system; the register map,
// widths and reset values (self trigger, all channels enabled, a window of
// 40 cycles = 1 us at 40 MHz, mid-scale thresholds) are this design's own.
module acdc_config_regs
  import daq_pkg::*;
#(
  parameter int unsigned N_PSEC4_P = N_PSEC4
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   cfg_valid,
  input  logic [WORD_W-1:0]      cfg_word,
  output trig_cfg_t              trig_cfg,
  output logic [11:0]            threshold [N_PSEC4_P],
  output logic                   soft_trig,
  output logic [7:0]             bad_addr
);
  logic [3:0]  addr;
  logic [11:0] value;
  assign addr  = cfg_word[15:12];
  assign value = cfg_word[11:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      trig_cfg.mode    <= TRIG_SELF;
      trig_cfg.ch_mask <= '1;
      trig_cfg.window  <= 12'd40;
      for (int i = 0; i < N_PSEC4_P; i++) threshold[i] <= 12'h800;
      soft_trig <= 1'b0;
      bad_addr  <= '0;
    end else begin
      soft_trig <= 1'b0;
      if (cfg_valid) begin
        if (addr >= CFG_THRESH0 && addr < CFG_THRESH0 + 4'(N_PSEC4_P)) begin
          for (int i = 0; i < N_PSEC4_P; i++)
            if (addr == CFG_THRESH0 + 4'(i)) threshold[i] <= value;
        end else begin
          unique case (addr)
            CFG_MODE:   trig_cfg.mode           <= trig_mode_e'(value[1:0]);
            CFG_MASK0:  trig_cfg.ch_mask[11:0]  <= value;
            CFG_MASK1:  trig_cfg.ch_mask[23:12] <= value;
            CFG_MASK2:  trig_cfg.ch_mask[29:24] <= value[5:0];
            CFG_WINDOW: trig_cfg.window         <= value;
            CFG_CMD:    soft_trig               <= value[0];
            default:    bad_addr                <= bad_addr + 1'b1;
          endcase
        end
      end
    end
  end
endmodule
