// Thermometer-to-binary encoder of one SOT-MRAM ADC-array row.
//
// An input voltage switches the cells of a row from the end with the highest
// reference voltage, so a row reads 1000, 1100, 1110, 1111 for the four levels
// of a 2-bit converter; the encoder turns that pattern into 0..LEVELS-1. The
// paper says only that "a small encoder" does this. This design takes the
// index of the highest switched cell, which equals the count of switched cells
// minus one for a clean thermometer code and ignores bubbles below the top.
// A row with no switched cell (not possible for a working array) encodes as 0.
// Purely combinational.
module therm_encoder #(
  parameter int unsigned LEVELS = 32,
  parameter int unsigned OUT_W  = $clog2(LEVELS)
) (
  input  logic [LEVELS-1:0] therm, // bit k = cell k switched (cell 0: highest reference)
  output logic [OUT_W-1:0]  code
);
  always_comb begin
    code = '0;
    for (int unsigned k = 0; k < LEVELS; k++)
      if (therm[k]) code = OUT_W'(k);
  end
endmodule
