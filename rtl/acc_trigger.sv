// acc_trigger: global trigger of the central card.
//
// A global trigger is registered when an enabled source fires:
//   src_en[0]  rising edge of the external trigger input (for example the
//              system-integration connector or an SMA input)
//   src_en[1]  host (software) trigger, a one-cycle request
//   src_en[2]  rising edge of the OR of the masked ACDC board-trigger lines
// The external input and board lines pass a two-flip-flop synchroniser
// first. A registered trigger makes sys_trig, the system-trigger line to
// every ACDC board, high for PULSE clocks; triggers during the pulse are
// not registered again. sys_trig rises at the first clock edge that sees a
// host request and at the third edge after an external or board edge. n_global counts registered
// triggers.
// Reading the ACDC boards out on a global trigger registered at the central
// card follows the published system; the set of sources, their enables and
// the pulse shape are this design's own.
module acc_trigger
  import daq_pkg::*;
#(
  parameter int unsigned N_ACDC_P = N_ACDC,
  parameter int unsigned PULSE    = 2
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [2:0]          src_en,
  input  logic [N_ACDC_P-1:0] board_mask,
  input  logic                ext_trig,
  input  logic                host_trig,
  input  logic [N_ACDC_P-1:0] board_trig,
  output logic                sys_trig,
  output logic [15:0]         n_global
);
  logic [1:0] ext_s;
  logic       ext_q;
  logic [N_ACDC_P-1:0] brd_s1, brd_s2;
  logic       brd_or, brd_q;
  logic       fire;
  logic [$clog2(PULSE+1)-1:0] left;

  assign brd_or = |(brd_s2 & board_mask);
  assign fire   = (src_en[0] && ext_s[1] && !ext_q) ||
                  (src_en[1] && host_trig) ||
                  (src_en[2] && brd_or && !brd_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ext_s    <= '0;
      ext_q    <= 1'b0;
      brd_s1   <= '0;
      brd_s2   <= '0;
      brd_q    <= 1'b0;
      left     <= '0;
      sys_trig <= 1'b0;
      n_global <= '0;
    end else begin
      ext_s  <= {ext_s[0], ext_trig};
      ext_q  <= ext_s[1];
      brd_s1 <= board_trig;
      brd_s2 <= brd_s1;
      brd_q  <= brd_or;
      if (left != '0) begin
        left     <= left - 1'b1;
        sys_trig <= (left != 1);
      end else if (fire) begin
        left     <= ($bits(left))'(PULSE);
        sys_trig <= 1'b1;
        n_global <= n_global + 1'b1;
      end else begin
        sys_trig <= 1'b0;
      end
    end
  end
endmodule
