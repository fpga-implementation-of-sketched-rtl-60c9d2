// sync_fifo: single-clock FIFO held in a block RAM array.
//
// DEPTH need not be a power of two (the read-out FIFOs hold 24576 words,
// one per pixel); the pointers wrap at DEPTH-1 and a word counter gives
// empty and full.  A push while full and a pop while empty are ignored.
//
// Timing: standard (not first-word-fall-through) read: dout carries the
// popped word one clock after pop, flagged by dout_valid.  Push and pop in
// the same clock are both carried out.
module sync_fifo #(
  parameter int DEPTH = 24576,
  parameter int W     = 32,
  localparam int AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int CNTW = $clog2(DEPTH + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          push,
  input  logic [W-1:0]  din,
  input  logic          pop,
  output logic [W-1:0]  dout,
  output logic          dout_valid,
  output logic          empty,
  output logic          full,
  output logic [CNTW-1:0] count
);

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wptr, rptr;
  logic          do_push, do_pop;

  assign empty   = (count == '0);
  assign full    = (count == CNTW'(DEPTH));
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;

  function automatic logic [AW-1:0] next_ptr(logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + AW'(1);
  endfunction

  always_ff @(posedge clk) begin
    if (do_push) mem[wptr] <= din;
    if (do_pop)  dout <= mem[rptr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr       <= '0;
      rptr       <= '0;
      count      <= '0;
      dout_valid <= 1'b0;
    end else begin
      if (do_push) wptr <= next_ptr(wptr);
      if (do_pop)  rptr <= next_ptr(rptr);
      count      <= count + CNTW'(do_push) - CNTW'(do_pop);
      dout_valid <= do_pop;
    end
  end

  // A full FIFO loses data: the host must drain a read-out before the next.
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) !(push && full))
    else $warning("sync_fifo: push while full, word dropped");

endmodule
