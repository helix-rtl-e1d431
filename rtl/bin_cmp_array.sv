// SOT-MRAM binary comparator array.
//
// ROWS x COLS magnetic cells (1 = high resistance, HRS; 0 = low, LRS). Two
// cells store one bit: 0 as (LRS, HRS), 1 as (HRS, LRS). Each DNA symbol is a
// 3-bit code, so it takes 6 cells, most significant bit first; with 256 cells
// a row holds 42 symbols. A query drives the read bit-lines: bit 0 as (low,
// high), 1 as (high, low), and pairs outside the query are left low. A
// high voltage across an LRS cell pushes current onto the row's source line,
// so a row's sense amplifier reports a mismatch exactly when some queried bit
// differs from the stored one. An unwritten pair (LRS, LRS) mismatches any
// query, which is how positions past the end of a stored sub-string are kept
// from matching; reset leaves every cell LRS.
// Cell encoding, voltages and row organisation follow the paper. A row is
// written in one clock (wr_en); the compare is combinational from q_high and
// q_apply, i.e. one search per clock.
module bin_cmp_array #(
  parameter int unsigned ROWS = 256,
  parameter int unsigned COLS = 256
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      wr_en,
  input  logic [$clog2(ROWS)-1:0]   wr_row,
  input  logic [COLS-1:0]           wr_hrs,    // cell states of the row
  input  logic [COLS-1:0]           q_high,    // read bit-line driven high
  input  logic [COLS-1:0]           q_apply,   // read bit-line driven at all
  output logic [ROWS-1:0]           mismatch   // source-line current sensed
);
  logic [COLS-1:0] hrs [ROWS];

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)     for (int unsigned r = 0; r < ROWS; r++) hrs[r] <= '0;
    else if (wr_en) hrs[wr_row] <= wr_hrs;

  always_comb
    for (int unsigned r = 0; r < ROWS; r++)
      mismatch[r] = |(q_apply & q_high & ~hrs[r]);
endmodule
