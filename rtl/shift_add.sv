// Shift-and-add unit of the dot-product engine.
//
// A weight of Q bits is spread over COLS_PER_W adjacent crossbar columns of
// CELL_BITS each (column c holds weight bits [c*CELL_BITS +: CELL_BITS]), and an
// input of Q bits is applied one bit per pass, least significant bit first.
// Each pass delivers one ADC code per column. For output k the unit adds
// code[k*COLS_PER_W + c] << (c*CELL_BITS) over the columns of the weight, shifts
// that by the pass number and accumulates. In CTC mode (ctc_mode=1) every
// column is its own output (one cell per probability), so only the pass shift
// applies. The paper names the unit and its place in the pipeline; the column
// mapping, LSB-first order and unsigned arithmetic are this design's choices.
// Timing: 'first' clears the accumulators with the pass, 'valid' marks a pass;
// acc holds the running sums one clock after each valid pass.
module shift_add #(
  parameter int unsigned N          = 128,
  parameter int unsigned ADC_BITS   = 5,
  parameter int unsigned CELL_BITS  = 2,
  parameter int unsigned Q          = 5,
  parameter int unsigned COLS_PER_W = (Q + CELL_BITS - 1) / CELL_BITS,
  parameter int unsigned ACC_W      = 16
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          valid,
  input  logic                          first,
  input  logic [$clog2(Q)-1:0]          pass,     // input bit position of this pass
  input  logic                          ctc_mode,
  input  logic [N-1:0][ADC_BITS-1:0]    code,
  output logic [N-1:0][ACC_W-1:0]       acc
);
  localparam int unsigned NW = N / COLS_PER_W;  // weights per crossbar in MAC mode

  logic [N-1:0][ACC_W-1:0] term;

  always_comb begin
    term = '0;
    if (ctc_mode) begin
      for (int unsigned k = 0; k < N; k++)
        term[k] = ACC_W'(code[k]) << pass;
    end else begin
      for (int unsigned k = 0; k < NW; k++) begin
        for (int unsigned c = 0; c < COLS_PER_W; c++)
          term[k] = term[k] + (ACC_W'(code[k*COLS_PER_W + c]) << (c * CELL_BITS));
        term[k] = term[k] << pass;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) acc <= '0;
    else if (valid)
      for (int unsigned k = 0; k < N; k++)
        acc[k] <= (first ? '0 : acc[k]) + term[k];
endmodule
