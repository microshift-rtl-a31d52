// run_counter: run-mode state of the nine subimages.
//
// Flat regions are coded as runs, JPEG-LS style. A pixel whose texture
// context is flat starts run mode in its subimage; while in run mode each
// pixel equal to its left subimage neighbour B ("hit") extends the run.
// Run lengths are sent in segments of 2^J pixels, J = J[idx] from the
// JPEG-LS table: when the count reaches 2^J a '1' is sent (seg), the count
// restarts and idx grows. The run ends either on a pixel that differs from
// B (interruption: '0' plus the count in J bits, then the pixel's own
// residual; idx shrinks by one) or at the last pixel of a subimage row,
// where a non-empty partial segment is closed with a '1' (eol).
// The nine subimages are interleaved in the raster scan but form separate
// bit streams, so each keeps its own {active, count, idx}.
// Run-length coding of flat contexts follows the paper, which points to
// JPEG-LS for it; the exact JPEG-LS rules and the per-subimage state are
// this design's reading.
// Timing: outputs are combinational from the state and the pixel's inputs;
// the state of subimage t is updated at the clock edge when valid is high.
// clear (frame start) and the synchronous active-low reset empty all runs.
module run_counter
  import microshift_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic                clear,
  input  logic                valid,
  input  sub_t                t,
  input  logic                flat,
  input  logic                hit,
  input  logic                eol,
  output logic                run_mode,   // pixel is coded in run mode
  output logic                ev_one,     // send '1' (segment or end of row)
  output logic                ev_int,     // send interruption
  output logic [3:0]          j,          // J of the interruption
  output logic [RUN_BITS-1:0] cnt         // count sent on interruption
);
  typedef struct packed {
    logic                active;
    logic [RUN_BITS-1:0] count;
    logic [4:0]          idx;
  } run_state_t;

  run_state_t st [N_SUB];
  run_state_t cur, nxt;
  logic [RUN_BITS-1:0] inc, seg;

  always_comb begin
    cur      = st[t];
    nxt      = cur;
    j        = run_j(cur.idx);
    seg      = RUN_BITS'(1) << j;
    inc      = cur.count + 1'b1;
    cnt      = cur.count;
    run_mode = cur.active || flat;
    ev_one   = 1'b0;
    ev_int   = 1'b0;
    if (run_mode) begin
      if (hit) begin
        nxt.active = !eol;
        if (inc == seg) begin
          ev_one    = 1'b1;
          nxt.count = '0;
          if (cur.idx != 5'd31) nxt.idx = cur.idx + 1'b1;
        end else begin
          ev_one    = eol;
          nxt.count = eol ? '0 : inc;
        end
      end else begin
        ev_int     = 1'b1;
        nxt.active = 1'b0;
        nxt.count  = '0;
        if (cur.idx != 5'd0) nxt.idx = cur.idx - 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      for (int s = 0; s < N_SUB; s++) st[s] <= '0;
    end else if (valid) begin
      st[t] <= nxt;
    end
  end
endmodule
