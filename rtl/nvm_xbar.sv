// Behavioural model of a ReRAM dot-product crossbar with bit-line merge
// switches (not synthesizable logic as such: the real part is an analog
// resistive array; the cell store is written as a plain array).
//
// N word-lines cross N bit-lines; every crossing holds a CELL_BITS conductance
// level G. A 1-bit DAC drives each word-line, so bit-line j carries the current
// sum over i of wl[i]*G[i][j], modelled as an integer in unit-cell currents.
// For CTC decoding each bit-line has an extra transistor S_j that connects it
// to bit-line j+1. With S_j closed the connected bit-lines share their charge;
// this model reports the whole sum of a connected group on its lowest bit-line
// and 0 on the others (the sensing point is this design's choice; the paper
// only says that closing the switches merges the probabilities).
// Cells are written one row per clock (wr_en, wr_row, wr_data); reset clears
// the array. The bit-line sums are combinational from wl, merge_sw and the cells.
module nvm_xbar #(
  parameter int unsigned N         = 128,
  parameter int unsigned CELL_BITS = 2,
  parameter int unsigned BL_W      = $clog2(N * ((1 << CELL_BITS) - 1) + 1)
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            wr_en,
  input  logic [$clog2(N)-1:0]            wr_row,
  input  logic [N-1:0][CELL_BITS-1:0]     wr_data,
  input  logic [N-1:0]                    wl,        // 1-bit DAC inputs
  input  logic [N-2:0]                    merge_sw,  // S_j joins bit-line j and j+1
  output logic [N-1:0][BL_W-1:0]          bl         // bit-line sums
);
  logic [N-1:0][N-1:0][CELL_BITS-1:0] gcell;  // gcell[row][col]
  logic [N-1:0][BL_W-1:0]             raw;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)     for (int unsigned r = 0; r < N; r++) gcell[r] <= '0;
    else if (wr_en) gcell[wr_row] <= wr_data;

  always_comb
    for (int unsigned j = 0; j < N; j++) begin
      raw[j] = '0;
      for (int unsigned i = 0; i < N; i++)
        if (wl[i]) raw[j] = raw[j] + BL_W'(gcell[i][j]);
    end

  // Merge connected groups: suf[j] is the sum from bit-line j to the end of
  // its group; only the group's lowest bit-line reports it.
  logic [N-1:0][BL_W-1:0] suf;

  always_comb begin
    suf[N-1] = raw[N-1];
    for (int j = N - 2; j >= 0; j--)
      suf[j] = raw[j] + (merge_sw[j] ? suf[j+1] : '0);
    bl[0] = suf[0];
    for (int j = 1; j < N; j++)
      bl[j] = merge_sw[j-1] ? '0 : suf[j];
  end
endmodule
