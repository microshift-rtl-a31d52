// run_length_coder: bits sent for one run-mode pixel.
//
// ev_one (a finished segment of 2^J pixels, or a partial segment closed at
// the end of a subimage row) sends the single bit '1'. ev_int (the run is
// interrupted) sends '0' followed by the pixels counted so far in J bits,
// most significant first. A hit that neither finishes a segment nor ends a
// row sends nothing (len = 0). The code is right-aligned: bits[len-1] is
// sent first. Bit format as in JPEG-LS run coding, which the paper refers
// to; it gives no format of its own.
// Purely combinational.
module run_length_coder
  import microshift_pkg::*;
(
  input  logic                ev_one,
  input  logic                ev_int,
  input  logic [3:0]          j,
  input  logic [RUN_BITS-1:0] cnt,
  output logic [RUN_BITS-1:0] bits,
  output logic [LEN_BITS-1:0] len
);
  always_comb begin
    bits = '0;
    len  = '0;
    if (ev_int) begin
      // leading '0' is implicit in the right-aligned word
      bits = cnt & ((RUN_BITS'(1) << j) - 1'b1);
      len  = LEN_BITS'(j) + 1'b1;
    end else if (ev_one) begin
      bits = RUN_BITS'(1);
      len  = LEN_BITS'(1);
    end
  end
endmodule
