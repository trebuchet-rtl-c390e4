// sync_fifo: small synchronous FIFO used for the frontend's three
// instruction queues (load/store, compute, shuffle).
//
// DEPTH entries of type T. push when !full, pop when !empty; the head entry
// is visible on `head` whenever !empty (first-word fall-through). Push and
// pop may happen in the same cycle. Timing: a pushed entry is at the head
// the cycle after the push when the queue was empty.
module sync_fifo #(
  parameter type         T     = logic [7:0],
  parameter int unsigned DEPTH = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic push,
  input  T     din,
  input  logic pop,
  output T     head,
  output logic full,
  output logic empty
);
  localparam int unsigned PW = $clog2(DEPTH);
  T              mem [DEPTH];
  logic [PW-1:0] rp, wp;
  logic [PW:0]   count;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rp <= '0; wp <= '0; count <= '0;
    end else begin
      if (push) begin
        wp <= (wp == PW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      end
      if (pop) begin
        rp <= (rp == PW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      end
      count <= count + (PW+1)'(push) - (PW+1)'(pop);
    end
  end

  always_ff @(posedge clk) if (push) mem[wp] <= din;

  assign head  = mem[rp];
  assign full  = (count == (PW+1)'(DEPTH));
  assign empty = (count == '0);

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(push && full));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty));
endmodule
