// sync_fifo: output FIFO of one subimage's compressed words.
//
// A single-clock FIFO of DEPTH words with first-word-fall-through read:
// dout shows the oldest word whenever empty is low, and pop removes it.
// Pushing into a full FIFO drops the word and sets the sticky overflow flag
// (cleared by clear or reset), so a frame that compresses badly is flagged
// instead of corrupting other data. clear empties the FIFO, used when the
// receiver aborts a frame. The nine-FIFO buffering follows the paper; the
// depth, the word width and the overflow policy are this design's choices.
// Timing: push and pop take effect at the clock edge; count and flags are
// registered. Synchronous active-low reset.
module sync_fifo #(
  parameter int WIDTH = 32,
  parameter int DEPTH = 4096
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clear,
  input  logic                     push,
  input  logic [WIDTH-1:0]         din,
  input  logic                     pop,
  output logic [WIDTH-1:0]         dout,
  output logic                     empty,
  output logic                     full,
  output logic [$clog2(DEPTH):0]   count,
  output logic                     overflow
);
  localparam int AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wptr, rptr;
  logic             do_push, do_pop;

  assign empty   = (count == '0);
  assign full    = (count == (AW+1)'(DEPTH));
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;
  assign dout    = mem[rptr];

  always_ff @(posedge clk) begin
    if (do_push) mem[wptr] <= din;
  end

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      wptr     <= '0;
      rptr     <= '0;
      count    <= '0;
      overflow <= 1'b0;
    end else begin
      if (do_push) wptr <= (wptr == AW'(DEPTH - 1)) ? '0 : wptr + 1'b1;
      if (do_pop)  rptr <= (rptr == AW'(DEPTH - 1)) ? '0 : rptr + 1'b1;
      count <= count + (AW+1)'(do_push) - (AW+1)'(do_pop);
      if (push && full) overflow <= 1'b1;
    end
  end

  // a pop on an empty FIFO is a caller error
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty));
endmodule
