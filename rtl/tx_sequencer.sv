// tx_sequencer: sends the nine subimage streams one after the other.
//
// Progressive transmission: the receiver gets all of subimage 1, then all of
// subimage 2, and so on, so it can show a coarse image early and refine it.
// From frame start the sequencer drains FIFO 1 while the frame is still
// being compressed; it moves to FIFO s+1 once FIFO s is empty and coded says
// every word of the frame is in its FIFO. Each word leaves on a valid/ready
// stream tagged with its subimage (0..8) and a last flag on the final word
// of that subimage. done pulses when FIFO 9 has been sent.
// tx_abort (the receiver has seen enough of this frame) is remembered and, once
// the frame is fully coded, empties all FIFOs and ends the frame at once;
// aborted pulses together with done.
// Serial, in-order transmission and early termination follow the paper;
// the stream handshake and tagging are this design's choices.
// Timing: out_* are combinational from the selected FIFO's head; a word is
// popped on the cycle out_valid & out_ready. Synchronous active-low reset.
module tx_sequencer
  import microshift_pkg::*;
#(
  parameter int WIDTH = 32,
  parameter int CW    = 13                     // FIFO count width
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,       // frame starts
  input  logic                    coded,       // all words are in the FIFOs
  input  logic                    tx_abort,
  input  logic [N_SUB-1:0]        fifo_empty,
  input  logic [CW-1:0]           fifo_count [N_SUB],
  input  logic [WIDTH-1:0]        fifo_dout [N_SUB],
  output logic [N_SUB-1:0]        fifo_pop,
  output logic                    fifo_clear,
  output logic                    out_valid,
  input  logic                    out_ready,
  output logic [WIDTH-1:0]        out_data,
  output sub_t                    out_sub,
  output logic                    out_last,
  output logic                    done,
  output logic                    aborted
);
  logic active, abort_pend;
  sub_t cur;

  always_comb begin
    out_valid  = active && !abort_pend && !fifo_empty[cur];
    out_data   = fifo_dout[cur];
    out_sub    = cur;
    out_last   = coded && (fifo_count[cur] == CW'(1));
    fifo_pop   = '0;
    fifo_pop[cur] = out_valid && out_ready;
    fifo_clear = active && abort_pend && coded;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      active     <= 1'b0;
      abort_pend <= 1'b0;
      cur        <= '0;
      done       <= 1'b0;
      aborted    <= 1'b0;
    end else begin
      done    <= 1'b0;
      aborted <= 1'b0;
      if (start) begin
        active     <= 1'b1;
        abort_pend <= 1'b0;
        cur        <= '0;
      end else if (active) begin
        if (tx_abort) abort_pend <= 1'b1;
        if (abort_pend && coded) begin
          active     <= 1'b0;
          abort_pend <= 1'b0;
          done       <= 1'b1;
          aborted    <= 1'b1;
        end else if (coded && fifo_empty[cur]) begin
          if (cur == sub_t'(N_SUB - 1)) begin
            active <= 1'b0;
            done   <= 1'b1;
          end else begin
            cur <= cur + 1'b1;
          end
        end
      end
    end
  end

  a_pop_only_when_valid: assert property (@(posedge clk) disable iff (!rst_n)
    (fifo_pop != '0) |-> out_valid);
endmodule
