// acdc_readout: event readout of an ACDC board onto its two serial data
// lines.
//
// On event_start the module walks the PSEC4 sample array: for each channel
// (0..5) and each cell (0..N_CELLS-1) it drives the channel/cell address to
// all five chips at once, takes their five ADC values (valid one clock
// after the address is seen, so it captures two clocks after setting it)
// and emits one word per chip. A packet is
//   {TAG_HEADER, event#}, N_CH*N_CELLS sample words {chip#, adc}, {TAG_TRAILER, event#}
// Words go out alternately on lane 0 and lane 1 (even words on lane 0),
// each through a valid/ready port to a serializer; no word is started while
// link_en (the flow-control flag from the central card) is low. done pulses
// for one cycle after the trailer is taken, and the event number then
// increments. With two 18-cycle serial frames in parallel a packet takes
// 9 cycles per word, plus a little for the three-cycle address fetch at
// each cell (about 9.4 cycles per word overall).
// Reading all 256 cells of all 30 channels follows the published system;
// the PSEC4 address/data interface, the packet format, the lane split and
// the use of the flag for flow control are this design's own.
module acdc_readout
  import daq_pkg::*;
#(
  parameter int unsigned N_CELLS_P = N_CELLS
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   event_start,
  input  logic                   link_en,
  output logic [2:0]             psec4_ch,
  output logic [7:0]             psec4_cell,
  input  logic [ADC_BITS-1:0]    psec4_data [N_PSEC4],
  output logic [1:0]             lane_valid,
  input  logic [1:0]             lane_ready,
  output logic [WORD_W-1:0]      lane_data,
  output logic                   done,
  output logic [11:0]            event_num
);
  typedef enum logic [2:0] {IDLE, HDR, ADDR, WAIT, CAPTURE, SAMP, TRL} state_e;
  state_e state;

  logic [ADC_BITS-1:0] sample [N_PSEC4];
  logic [2:0]          chip;
  logic                lane;       // lane of the next word
  logic                pending;    // word in `word` not yet taken
  logic [WORD_W-1:0]   word;
  logic                fire;

  assign lane_data  = word;
  assign lane_valid = (pending && link_en) ? (lane ? 2'b10 : 2'b01) : 2'b00;
  assign fire       = pending && link_en && lane_ready[lane];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= IDLE;
      psec4_ch   <= '0;
      psec4_cell <= '0;
      chip       <= '0;
      lane       <= 1'b0;
      pending    <= 1'b0;
      word       <= '0;
      done       <= 1'b0;
      event_num  <= '0;
      for (int i = 0; i < N_PSEC4; i++) sample[i] <= '0;
    end else begin
      done <= 1'b0;
      if (fire) begin
        pending <= 1'b0;
        lane    <= ~lane;
      end
      unique case (state)
        IDLE: if (event_start) begin
          word       <= {TAG_HEADER, event_num};
          pending    <= 1'b1;
          lane       <= 1'b0;
          psec4_ch   <= '0;
          psec4_cell <= '0;
          state      <= HDR;
        end
        HDR: if (fire) state <= WAIT;   // address 0/0 already set
        ADDR: state <= WAIT;
        WAIT: state <= CAPTURE;
        CAPTURE: begin
          sample <= psec4_data;
          chip   <= '0;
          state  <= SAMP;
        end
        SAMP: begin
          if (!pending || fire) begin
            if (chip == 3'(N_PSEC4)) begin
              // all five words of this cell handed over
              if (psec4_cell == 8'(N_CELLS_P - 1)) begin
                psec4_cell <= '0;
                if (psec4_ch == 3'(CH_PER_PSEC4 - 1)) begin
                  word    <= {TAG_TRAILER, event_num};
                  pending <= 1'b1;
                  state   <= TRL;
                end else begin
                  psec4_ch <= psec4_ch + 1'b1;
                  state    <= ADDR;
                end
              end else begin
                psec4_cell <= psec4_cell + 1'b1;
                state      <= ADDR;
              end
            end else begin
              word    <= {1'b0, chip, sample[chip]};
              pending <= 1'b1;
              chip    <= chip + 1'b1;
            end
          end
        end
        TRL: if (fire) begin
          done      <= 1'b1;
          event_num <= event_num + 1'b1;
          state     <= IDLE;
        end
        default: state <= IDLE;
      endcase
    end
  end
endmodule
