// psec4_model: behavioural model (testbench only) of the readout side of
// the five PSEC4 chips of one ACDC board. The chips themselves are analog
// sampling ASICs; this model only returns, one clock after an address is
// presented, a known 12-bit value for every chip, channel and cell, as
// given by the function value() so a testbench can predict every sample.
module psec4_model #(
  parameter int BOARD = 0
) (
  input  logic        clk,
  input  logic [2:0]  ch,
  input  logic [7:0]  cell_addr,
  output logic [11:0] data [5]
);
  function automatic logic [11:0] value(int board, int chip, int c, int cl);
    return 12'((board * 1009 + chip * 331 + c * 97 + cl * 13 + 5) % 4096);
  endfunction
  initial for (int i = 0; i < 5; i++) data[i] = '0;
  always @(posedge clk)
    for (int i = 0; i < 5; i++) data[i] <= value(BOARD, i, int'(ch), int'(cell_addr));
endmodule
