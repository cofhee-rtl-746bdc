// cmd_fifo -- the command queue: a synchronous first-in first-out buffer of
// DEPTH entries of W bits.
//
// push writes wdata at the tail when not full; pop removes the head when not
// empty; rdata always shows the head.  Push and pop may happen in the same
// cycle.  A push into a full queue is dropped and pulses overflow.  count is
// the number of entries held.  The depth of 32 commands and the 32-bit entry
// are the paper's; the overflow flag is this design's choice.
module cmd_fifo #(
  parameter int unsigned DEPTH = 32,
  parameter int unsigned W     = 32,
  parameter int unsigned CW    = $clog2(DEPTH + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          push,
  input  logic [W-1:0]  wdata,
  input  logic          pop,
  output logic [W-1:0]  rdata,
  output logic          empty,
  output logic          full,
  output logic          overflow,
  output logic [CW-1:0] count
);
  localparam int unsigned PW = $clog2(DEPTH);
  logic [W-1:0]  mem [DEPTH];
  logic [PW-1:0] rp, wp;
  logic          do_push, do_pop;

  assign empty    = (count == '0);
  assign full     = (count == CW'(DEPTH));
  assign do_push  = push && !full;
  assign do_pop   = pop && !empty;
  assign overflow = push && full;
  assign rdata    = mem[rp];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rp <= '0; wp <= '0; count <= '0;
    end else begin
      if (do_push) wp <= (wp == PW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (do_pop)  rp <= (rp == PW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      count <= count + CW'(do_push) - CW'(do_pop);
    end
  end

  always_ff @(posedge clk) if (do_push) mem[wp] <= wdata;

  assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty));
endmodule
