// Pipelined dot-product engine with SOT-MRAM ADC arrays.
//
// One N x N crossbar (2-bit cells, 1-bit word-line DACs) computes N bit-line
// sums per clock. The five stages follow the paper's engine pipeline:
//   1 fetch   - one N-bit input slice is read from the input register (IR);
//   2 MAC     - the crossbar forms the bit-line sums, held in a register
//               (the sample-and-hold);
//   3 ADC     - N/32 SOT-MRAM ADC arrays of 32 rows turn the sums into
//               thermometer codes, registered;
//   4 S&A     - one encoder per bit-line gives the 5-bit code and the
//               shift-and-add unit accumulates it;
//   5 store   - after the last slice the N results go to the output register.
// A job (start) names the IR address of its first slice and the number of
// slices (input bits, LSB first, consecutive IR words). The slices stream one
// per clock; the clock that accepts start is stage 1 of slice 0, so a job of S
// slices writes the output register and raises done S+3 clocks later, and
// the next job may start on the clock after done.
// In MAC mode a 5-bit weight occupies 3 adjacent columns and output k is
// word k of the output register; in CTC mode (ctc_mode) each column is one
// output and merge_sw closes the bit-line merge switches for the whole job.
// IR: 128 words of N bits (2 KB, as in the paper's table). OR: N words of
// ACC_W=16 bits (256 B). The crossbar is programmed a row per clock through
// xb_we; programming and a running job must not overlap.
// Follows the paper: stage list, IR/OR sizes, 1-bit inputs, 2-bit cells,
// 32x32 5-bit ADC arrays. Own choices: job interface, slice order, one clock
// per stage, merge sensing at the group's lowest bit-line.
module dpe_pipeline
  import helix_pkg::*;
#(
  parameter int unsigned N        = 128,
  parameter int unsigned IR_WORDS = 128,
  parameter int unsigned ADC_ROWS = 32,
  parameter int unsigned LEVELS   = 32,
  parameter int unsigned Q        = Q_BITS,
  parameter int unsigned ACCW     = ACC_W,
  parameter int unsigned ADC_LSB  = 1
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // input register write port
  input  logic                          ir_we,
  input  logic [$clog2(IR_WORDS)-1:0]   ir_waddr,
  input  logic [N-1:0]                  ir_wdata,
  // crossbar programming port
  input  logic                          xb_we,
  input  logic [$clog2(N)-1:0]          xb_row,
  input  logic [N-1:0][CELL_BITS-1:0]   xb_data,
  // job control
  input  logic                          start,
  input  logic [$clog2(IR_WORDS)-1:0]   in_base,
  input  logic [$clog2(Q+1)-1:0]        nslices,
  input  logic                          ctc_mode,
  input  logic [N-2:0]                  merge_sw,
  output logic                          busy,
  output logic                          done,
  // output register read port
  input  logic [$clog2(N)-1:0]          or_raddr,
  output logic [ACCW-1:0]               or_rdata
);
  localparam int unsigned BLW  = $clog2(N * ((1 << CELL_BITS) - 1) + 1);
  localparam int unsigned ABIT = $clog2(LEVELS);
  localparam int unsigned PW   = $clog2(Q);

  typedef struct packed {
    logic          valid;
    logic          first;
    logic          last;
    logic [PW-1:0] pass;
  } slice_ctl_t;

  logic [N-1:0]          ir_mem [IR_WORDS];
  logic [ACCW-1:0]       or_mem [N];

  // ---- issue -------------------------------------------------------------
  logic                          issuing;
  logic [$clog2(Q+1)-1:0]        issue_cnt, job_slices;
  logic [$clog2(IR_WORDS)-1:0]   issue_addr;
  logic                          job_ctc;
  logic [N-2:0]                  job_merge;

  // ---- stage registers ---------------------------------------------------
  slice_ctl_t                    c1, c2, c3, c4;
  logic [N-1:0]                  s1_wl;
  logic [N-1:0][BLW-1:0]         s2_bl;
  logic [N-1:0][LEVELS-1:0]      s3_therm;

  logic [N-1:0][BLW-1:0]         bl;
  logic [N-1:0][LEVELS-1:0]      therm;
  logic [N-1:0][ABIT-1:0]        code;
  logic [N-1:0][ACCW-1:0]        acc;

  always_ff @(posedge clk)
    if (ir_we) ir_mem[ir_waddr] <= ir_wdata;

  // Stage 1: fetch
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      issuing <= 1'b0; issue_cnt <= '0; job_slices <= '0; issue_addr <= '0;
      job_ctc <= 1'b0; job_merge <= '0; c1 <= '0; s1_wl <= '0; busy <= 1'b0;
    end else begin
      c1.valid <= 1'b0;
      if (start && !busy && nslices != 0) begin
        busy       <= 1'b1;
        issuing    <= (nslices > 1);
        issue_cnt  <= 1;
        job_slices <= nslices;
        issue_addr <= in_base + 1'b1;
        job_ctc    <= ctc_mode;
        job_merge  <= merge_sw;
        s1_wl      <= ir_mem[in_base];
        c1         <= '{valid: 1'b1, first: 1'b1, last: (nslices == 1), pass: '0};
      end else if (issuing) begin
        s1_wl      <= ir_mem[issue_addr];
        c1         <= '{valid: 1'b1, first: 1'b0, last: (issue_cnt + 1'b1 == job_slices),
                        pass: PW'(issue_cnt)};
        issue_addr <= issue_addr + 1'b1;
        issue_cnt  <= issue_cnt + 1'b1;
        if (issue_cnt + 1'b1 == job_slices) issuing <= 1'b0;
      end
      if (done) busy <= 1'b0;
    end

  // Stage 2: MAC in the crossbar, bit-line sums sampled and held
  nvm_xbar #(.N(N), .CELL_BITS(CELL_BITS), .BL_W(BLW)) u_xbar (
    .clk, .rst_n, .wr_en(xb_we), .wr_row(xb_row), .wr_data(xb_data),
    .wl(s1_wl), .merge_sw(job_merge), .bl(bl)
  );

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin c2 <= '0; s2_bl <= '0; end
    else begin c2 <= c1; if (c1.valid) s2_bl <= bl; end

  // Stage 3: SOT-MRAM ADC arrays, ADC_ROWS bit-lines each
  for (genvar a = 0; a < N / ADC_ROWS; a++) begin : g_adc
    sot_adc_array #(.ROWS(ADC_ROWS), .LEVELS(LEVELS), .IN_W(BLW), .LSB(ADC_LSB)) u_adc (
      .vin  (s2_bl[a*ADC_ROWS +: ADC_ROWS]),
      .therm(therm[a*ADC_ROWS +: ADC_ROWS])
    );
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin c3 <= '0; s3_therm <= '0; end
    else begin c3 <= c2; if (c2.valid) s3_therm <= therm; end

  // Stage 4: encoders and shift-and-add
  for (genvar b = 0; b < N; b++) begin : g_enc
    therm_encoder #(.LEVELS(LEVELS), .OUT_W(ABIT)) u_enc (.therm(s3_therm[b]), .code(code[b]));
  end

  shift_add #(.N(N), .ADC_BITS(ABIT), .CELL_BITS(CELL_BITS), .Q(Q), .ACC_W(ACCW)) u_sa (
    .clk, .rst_n, .valid(c3.valid), .first(c3.first), .pass(c3.pass),
    .ctc_mode(job_ctc), .code(code), .acc(acc)
  );

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) c4 <= '0;
    else        c4 <= c3;

  // Stage 5: store results
  always_ff @(posedge clk)
    if (c4.valid && c4.last)
      for (int unsigned k = 0; k < N; k++) or_mem[k] <= acc[k];

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) done <= 1'b0;
    else        done <= c4.valid && c4.last;

  assign or_rdata = or_mem[or_raddr];

  // A job is started only while the engine is idle.
  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy);
  // The crossbar is not reprogrammed while slices are in flight.
  a_no_write_in_job: assert property (@(posedge clk) disable iff (!rst_n)
                                      xb_we |-> !(c1.valid || issuing));
endmodule
