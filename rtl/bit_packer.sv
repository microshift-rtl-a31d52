// bit_packer: packs the variable-length codes of one subimage into words.
//
// Codes arrive right-aligned (bits[len-1] first, 0..24 bits) and are
// appended MSB-first to a 64-bit accumulator. As soon as 32 or more bits
// are held, the top 32 leave as one word for the subimage's FIFO. flush
// (after the frame's last code) sends out a partly filled word padded with
// zeros. The decoder knows the number of pixels, so the padding needs no
// marker. Packing into 32-bit words is this design's choice; the paper
// only says the variable-length bit stream goes into the FIFOs.
// Timing: wr_en/wr_data are registered, one cycle after the code that
// completes the word (or after flush). At most one word per cycle, since a
// code is shorter than a word. Synchronous active-low reset.
module bit_packer
  import microshift_pkg::*;
#(
  parameter int WORD = 32
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  logic [CODE_BITS-1:0]  in_bits,
  input  logic [LEN_BITS-1:0]   in_len,
  input  logic                  flush,
  output logic                  wr_en,
  output logic [WORD-1:0]       wr_data
);
  localparam int ACC = 2 * WORD;

  logic [ACC-1:0]     acc, acc_new, code;
  logic [CODE_BITS-1:0] mask;
  logic [6:0]         fill, fill_new;

  always_comb begin
    mask     = (CODE_BITS'(1) << in_len) - CODE_BITS'(1);
    code     = ACC'(in_bits & mask);
    acc_new  = acc;
    fill_new = fill;
    if (in_valid && in_len != '0) begin
      acc_new  = acc | (code << (7'(ACC) - fill - 7'(in_len)));
      fill_new = fill + 7'(in_len);
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acc     <= '0;
      fill    <= '0;
      wr_en   <= 1'b0;
      wr_data <= '0;
    end else begin
      wr_en <= 1'b0;
      if (flush) begin
        if (fill != '0) begin
          wr_en   <= 1'b1;
          wr_data <= acc[ACC-1 -: WORD];
        end
        acc  <= '0;
        fill <= '0;
      end else if (fill_new >= 7'(WORD)) begin
        wr_en   <= 1'b1;
        wr_data <= acc_new[ACC-1 -: WORD];
        acc     <= acc_new << WORD;
        fill    <= fill_new - 7'(WORD);
      end else begin
        acc  <= acc_new;
        fill <= fill_new;
      end
    end
  end
endmodule
