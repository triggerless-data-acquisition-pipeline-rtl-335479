// sync_fifo: single-clock first-in first-out buffer.
//
// DEPTH entries of W bits held in a register array, written when push is high
// and read (show-ahead: dout is the oldest entry whenever empty is low) when pop
// is high. Pushing while full is ignored by the FIFO; the caller decides what a
// lost word means. Pop and push may happen in the same cycle. Asserts check
// that nothing pops an empty FIFO.
module sync_fifo #(
  parameter int W     = 128,
  parameter int DEPTH = 16,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         push,
  input  logic [W-1:0] din,
  input  logic         pop,
  output logic [W-1:0] dout,
  output logic         empty,
  output logic         full
);

  logic [W-1:0] mem [DEPTH];
  logic [AW-1:0] rd, wr;
  logic [AW:0]   count;

  assign empty = (count == 0);
  assign full  = (count == (AW+1)'(DEPTH));
  assign dout  = mem[rd];

  logic do_push, do_pop;
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;

  always_ff @(posedge clk) begin
    if (do_push) mem[wr] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd <= '0; wr <= '0; count <= '0;
    end else begin
      if (do_push) wr <= (int'(wr) == DEPTH - 1) ? '0 : wr + 1'b1;
      if (do_pop)  rd <= (int'(rd) == DEPTH - 1) ? '0 : rd + 1'b1;
      count <= count + (AW+1)'(do_push) - (AW+1)'(do_pop);
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty))
    else $error("sync_fifo: pop while empty");

endmodule
