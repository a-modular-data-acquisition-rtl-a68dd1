// sync_fifo: single-clock first-in first-out buffer.
//
// DEPTH entries of W bits held in a register array. push writes din when
// not full; pop removes the head, which is always visible on dout while
// not empty (first-word fall-through). A push while full is dropped and
// counted in overflows; count gives the fill level. Push and pop in the
// same cycle are allowed. A helper of the central-card link receiver.
module sync_fifo #(
  parameter int unsigned W     = 16,
  parameter int unsigned DEPTH = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       push,
  input  logic [W-1:0]               din,
  input  logic                       pop,
  output logic [W-1:0]               dout,
  output logic                       empty,
  output logic                       full,
  output logic [$clog2(DEPTH+1)-1:0] count,
  output logic [7:0]                 overflows
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] rd_ptr, wr_ptr;
  logic          do_push, do_pop;

  assign empty   = (count == '0);
  assign full    = (count == ($bits(count))'(DEPTH));
  assign dout    = mem[rd_ptr];
  assign do_pop  = pop && !empty;
  assign do_push = push && !full;

  always_ff @(posedge clk) begin
    if (do_push) mem[wr_ptr] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr    <= '0;
      wr_ptr    <= '0;
      count     <= '0;
      overflows <= '0;
    end else begin
      if (do_push) wr_ptr <= (wr_ptr == AW'(DEPTH - 1)) ? '0 : wr_ptr + 1'b1;
      if (do_pop)  rd_ptr <= (rd_ptr == AW'(DEPTH - 1)) ? '0 : rd_ptr + 1'b1;
      count <= count + ($bits(count))'(do_push) - ($bits(count))'(do_pop);
      if (push && full) overflows <= overflows + 1'b1;
    end
  end
endmodule
