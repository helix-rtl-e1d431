// CTC beam-search step sequencer for the dot-product engine.
//
// One beam step multiplies every kept probability of the previous time step
// (p_prev, Q bits each) with every kept probability of the current step
// (p_cur, one CELL_BITS crossbar cell each) and adds up the products of the
// candidates that collapse to the same read, all inside the crossbar:
//   1 program: candidate d = j*W + i owns row d and column d. Only the
//     diagonal cell (d,d) is written, with p_cur[j], so each current-step
//     probability appears W times along the diagonal; every other cell of
//     those rows is written 0.
//   2 inputs:  word-line d carries p_prev[i'] with i' = i on even j and
//     W-1-i on odd j (the snake order of the paper's width-2 example:
//     A1,A1,-1,-1 on the diagonal and A0,-0,-0,A0 on the word-lines). The Q
//     bit-slices go to the input register at IR_BASE.
//   3 compute: one CTC-mode engine job with the merge switches S_0..S_{W*W-2}
//     set from merge_sw; each closed switch joins candidate d with d+1.
//   4 collect: words 0..W*W-1 of the output register are copied to cand_sum.
//     A merged group's total sits at its lowest candidate, the rest read 0.
// Which switches to close (which candidates are the same read) is decided by
// the beam-search bookkeeping outside this block; the paper shows the switch
// transistors but not how their settings are chosen.
// Timing: start while idle; done pulses, with cand_sum valid, 2*W*W + 2*Q + 6
// clocks after the clock that accepted start (W*W programming, Q input words,
// the Q+3-clock engine job and W*W reads, plus handshake clocks). The paper's evaluated beam width is W=10 (100 rows of the
// 128-row crossbar). Programming rows one per clock is this design's choice.
module ctc_ctrl
  import helix_pkg::*;
#(
  parameter int unsigned W        = 10,
  parameter int unsigned N        = 128,
  parameter int unsigned Q        = Q_BITS,
  parameter int unsigned IR_WORDS = 128,
  parameter int unsigned IR_BASE  = IR_WORDS - Q,
  parameter int unsigned ACCW     = ACC_W
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  logic [W-1:0][Q-1:0]           p_prev,
  input  logic [W-1:0][CELL_BITS-1:0]   p_cur,
  input  logic [W*W-2:0]                merge_sw,
  output logic                          busy,
  output logic                          done,
  output logic [W*W-1:0][ACCW-1:0]      cand_sum,
  // engine side
  output logic                          xb_we,
  output logic [$clog2(N)-1:0]          xb_row,
  output logic [N-1:0][CELL_BITS-1:0]   xb_data,
  output logic                          ir_we,
  output logic [$clog2(IR_WORDS)-1:0]   ir_waddr,
  output logic [N-1:0]                  ir_wdata,
  output logic                          dpe_start,
  output logic [$clog2(IR_WORDS)-1:0]   dpe_base,
  output logic [$clog2(Q+1)-1:0]        dpe_nslices,
  output logic [N-2:0]                  dpe_merge,
  input  logic                          dpe_done,
  output logic [$clog2(N)-1:0]          or_raddr,
  input  logic [ACCW-1:0]               or_rdata
);
  localparam int unsigned WW = W * W;

  typedef enum logic [2:0] {IDLE, PROG, INPUT, RUN, WAIT, COLLECT} state_e;
  state_e                 state;
  logic [$clog2(N)-1:0]   cnt;
  logic [W-1:0][Q-1:0]    prev_q;
  logic [W-1:0][CELL_BITS-1:0] cur_q;
  logic [WW-2:0]          merge_q;

  // Word-line value of candidate d for bit b.
  function automatic logic wl_bit(logic [W-1:0][Q-1:0] pp, int unsigned d, int unsigned b);
    int unsigned j = d / W;
    int unsigned i = d % W;
    if (j % 2 == 1) i = W - 1 - i;
    return pp[i][b];
  endfunction

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      state <= IDLE; cnt <= '0; prev_q <= '0; cur_q <= '0; merge_q <= '0;
      done <= 1'b0; cand_sum <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        IDLE: if (start) begin
          prev_q <= p_prev; cur_q <= p_cur; merge_q <= merge_sw;
          cnt <= '0; state <= PROG;
        end
        PROG: begin
          cnt <= cnt + 1'b1;
          if (cnt == $clog2(N)'(WW - 1)) begin cnt <= '0; state <= INPUT; end
        end
        INPUT: begin
          cnt <= cnt + 1'b1;
          if (cnt == $clog2(N)'(Q - 1)) begin cnt <= '0; state <= RUN; end
        end
        RUN:  state <= WAIT;
        WAIT: if (dpe_done) begin cnt <= '0; state <= COLLECT; end
        COLLECT: begin
          cand_sum[cnt] <= or_rdata;
          cnt <= cnt + 1'b1;
          if (cnt == $clog2(N)'(WW - 1)) begin state <= IDLE; done <= 1'b1; end
        end
        default: state <= IDLE;
      endcase
    end

  always_comb begin
    xb_we    = (state == PROG);
    xb_row   = cnt;
    xb_data  = '0;
    xb_data[cnt] = cur_q[cnt / $clog2(N)'(W)];
    ir_we    = (state == INPUT);
    ir_waddr = $clog2(IR_WORDS)'(IR_BASE) + $clog2(IR_WORDS)'(cnt);
    ir_wdata = '0;
    for (int unsigned d = 0; d < WW; d++) ir_wdata[d] = wl_bit(prev_q, d, int'(cnt));
    dpe_start   = (state == RUN);
    dpe_base    = $clog2(IR_WORDS)'(IR_BASE);
    dpe_nslices = $clog2(Q+1)'(Q);
    dpe_merge   = '0;
    dpe_merge[WW-2:0] = merge_q;
    or_raddr    = cnt;
  end

  assign busy = (state != IDLE);

  // The candidate grid must fit the crossbar.
  initial assert (WW <= N) else $error("beam width %0d needs %0d crossbar rows", W, WW);
endmodule
