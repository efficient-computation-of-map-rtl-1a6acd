// core_lut: per-core look-up table of the occupancy-dependent constants.
//
// For each of the 101 occupancy codes (probability o = code/100) the table
// returns lambda = -log(1-o), -log(lambda) and 1/lambda in Q20.12, plus a flag
// for the degenerate full-occupancy code. The source design keeps these in a
// small block-RAM table per core and handles o = 0 and o = 1 with
// precomputed values; here o = 0 stores zeros (the limits of the terms that
// use them; the zero lambda also makes the preprocess section use E = 1)
// and o = 1 stores lambda = 8, -log(1e7) and 0, with the flag
// forcing e^{-lambda w} to 0 downstream. Codes above 100 read as 100.
// Entry k of the hex file is {lambda, -log lambda, 1/lambda}, each rounded
// to the nearest multiple of 2^-12.
//
// Timing: synchronous ROM, one read per cycle, data one cycle after occ.
module core_lut
  import fcmi_pkg::*;
#(
  parameter string LUT_FILE = "rtl/occ_lut.hex"
) (
  input  logic       clk,
  input  logic       en,
  input  occ_t       occ,
  output lut_entry_t entry,
  output logic       full      // occupancy code 100 (o = 1)
);
  lut_entry_t rom [OCC_LEVELS];
  initial $readmemh(LUT_FILE, rom);

  logic [6:0] idx;
  always_comb idx = (occ > occ_t'(OCC_LEVELS-1)) ? 7'(OCC_LEVELS-1) : occ[6:0];

  always_ff @(posedge clk) begin
    if (en) begin
      entry <= rom[idx];
      full  <= (idx == 7'(OCC_LEVELS-1));
    end
  end
endmodule
