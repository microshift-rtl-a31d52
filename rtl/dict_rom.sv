// dict_rom: dictionary of the intra-predictor, one entry per context.
//
// Entry l (l = 0..312) is the value of X - B predicted for texture context
// l, as a 4-bit two's-complement number. The trained table (most frequent
// X - B per context over a training set) is not part of this release, so by
// default the table is filled by formula: D(l) = q1, the first quantized
// texture element A - C of context l, which turns the predictor into the
// planar rule X ~ B + (A - C) saturated to +-2. A trained table can be
// loaded instead by naming a hex file of 313 entries in INIT_FILE.
// The 313-entry read-only dictionary follows the paper; its default
// contents and the entry width are this design's choice.
// Read is combinational (a LUT ROM); the predictor registers the result.
module dict_rom
  import microshift_pkg::*;
#(
  parameter string INIT_FILE = ""
) (
  input  ctx_t               addr,
  output logic signed [3:0]  data
);
  logic [3:0] rom [N_CTX];

  initial begin
    if (INIT_FILE != "") $readmemh(INIT_FILE, rom);
    else for (int l = 0; l < N_CTX; l++) rom[l] = default_dict(l);
  end

  assign data = (int'(addr) < N_CTX) ? $signed(rom[addr]) : 4'sd0;
endmodule
