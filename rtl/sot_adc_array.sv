// Behavioural model of a SOT-MRAM ADC array (not synthesizable logic: the real
// part is an analog array of magnetic tunnel junctions).
//
// Each of the ROWS rows converts one bit-line value. All cells of a row share
// the row's write bit-line, which carries the input voltage, while cell k sees
// reference voltage Vref_k on its read bit-line. A higher reference lowers the
// cell's write threshold, so the input switches a prefix of the row: the row
// becomes a thermometer code. Here the analog input is the bit-line sum in
// units of one cell current, and cell k switches when the input is at least
// k*LSB (cell 0 always switches, as in the paper's 1000/1100/1110/1111 cases).
// A 5-bit array has 32 cells per row and 32 rows (32x32 in the paper's table);
// the LSB-to-current ratio is this design's own choice, the paper gives none.
// Conversion completes within one clock; cells are reset before each write.
module sot_adc_array #(
  parameter int unsigned ROWS   = 32,
  parameter int unsigned LEVELS = 32,
  parameter int unsigned IN_W   = 9,
  parameter int unsigned LSB    = 1
) (
  input  logic [ROWS-1:0][IN_W-1:0]   vin,   // analog input per row, in cell-current units
  output logic [ROWS-1:0][LEVELS-1:0] therm  // switched cells per row
);
  always_comb
    for (int unsigned r = 0; r < ROWS; r++)
      for (int unsigned k = 0; k < LEVELS; k++)
        therm[r][k] = (32'(vin[r]) >= k * LSB);
endmodule
