// Test harness for ctc_ctrl at one beam width W: a ctc_ctrl drives its own
// dot-product engine; the harness runs NRUN beam steps with random
// probabilities and merge switches (run 0 can be given fixed values) and
// compares cand_sum with a reference computed here: candidate d = j*W+i
// multiplies p_cur[j] with p_prev[i] (i reversed on odd j), closed switches
// add neighbouring candidates into the lowest one, and every input bit-slice
// is clipped at the 5-bit ADC full scale before the shift-and-add.
module ctc_bench #(
  parameter int unsigned W    = 2,
  parameter int unsigned NRUN = 4,
  parameter bit          FIG  = 0     // run 0 uses the width-2 figure example
) (
  input  logic clk,
  input  logic rst_n,
  input  logic go,
  output int   checks,
  output int   failures,
  output int   merges,
  output logic finished
);
  import helix_pkg::*;
  localparam int N = 128, Q = 5, WW = W * W;
  logic start = 0;
  logic [W-1:0][Q-1:0] p_prev;
  logic [W-1:0][1:0]   p_cur;
  logic [WW-2:0]       merge_sw;
  logic busy, done;
  logic [WW-1:0][15:0] cand_sum;
  logic xb_we; logic [6:0] xb_row; logic [N-1:0][1:0] xb_data;
  logic ir_we; logic [6:0] ir_waddr; logic [N-1:0] ir_wdata;
  logic dpe_start; logic [6:0] dpe_base; logic [2:0] dpe_nslices; logic [N-2:0] dpe_merge;
  logic dpe_done, dpe_busy; logic [6:0] or_raddr; logic [15:0] or_rdata;

  ctc_ctrl #(.W(W)) dut (.*);
  dpe_pipeline u_dpe (
    .clk, .rst_n, .ir_we, .ir_waddr, .ir_wdata, .xb_we, .xb_row, .xb_data,
    .start(dpe_start), .in_base(dpe_base), .nslices(dpe_nslices), .ctc_mode(1'b1),
    .merge_sw(dpe_merge), .busy(dpe_busy), .done(dpe_done), .or_raddr, .or_rdata
  );

  initial begin
    int exp [WW]; int prod [WW]; int bl [WW]; int head, s, i, cyc;
    checks = 0; failures = 0; merges = 0; finished = 0;
    p_prev = '0; p_cur = '0; merge_sw = '0;
    wait (go);
    for (int run = 0; run < NRUN; run++) begin
      @(negedge clk);
      if (FIG && run == 0) begin
        // t=0: A 0.3, blank 0.4 on the word-lines (x32); t=1: A 0.3, blank 0.5
        // in the cells (x4, 2-bit); all switches S0..S2 closed.
        p_prev[0] = 5'd10; p_prev[1] = 5'd13; p_cur[0] = 2'd1; p_cur[1] = 2'd2;
        merge_sw = '1;
      end else begin
        for (int a = 0; a < W; a++) begin
          p_prev[a] = Q'($urandom_range(31, 0)); p_cur[a] = 2'($urandom_range(3, 0));
        end
        for (int d = 0; d < WW - 1; d++) merge_sw[d] = ($urandom_range(2, 0) == 0);
      end
      for (int d = 0; d < WW; d++) exp[d] = 0;
      for (int b = 0; b < Q; b++) begin
        for (int d = 0; d < WW; d++) begin
          i = d % W; if ((d / W) % 2 == 1) i = W - 1 - i;
          prod[d] = p_prev[i][b] ? int'(p_cur[d / W]) : 0;
          bl[d] = 0;
        end
        head = 0; s = 0;
        for (int d = 0; d < WW; d++) begin
          if (d != 0 && !merge_sw[d-1]) begin bl[head] = s; s = 0; head = d; end
          s += prod[d];
        end
        bl[head] = s;
        for (int d = 0; d < WW; d++) exp[d] += (bl[d] > 31 ? 31 : bl[d]) << b;
      end
      for (int d = 0; d < WW - 1; d++) if (merge_sw[d]) merges++;
      start = 1; @(negedge clk); start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != 2 * WW + 2 * Q + 6) begin
        failures++; $display("FAIL W=%0d: step took %0d clocks, expected %0d", W, cyc, 2*WW + 2*Q + 6);
      end
      for (int d = 0; d < WW; d++) begin
        checks++;
        if (int'(cand_sum[d]) != exp[d]) begin
          failures++;
          if (failures < 10) $display("FAIL W=%0d run %0d cand %0d: %0d exp %0d", W, run, d, cand_sum[d], exp[d]);
        end
      end
      if (FIG && run == 0) begin
        checks++;
        // p(A) = (10+13)*1 + (13+10)*2 = 69 on bit-line 0, nothing elsewhere
        if (cand_sum[0] != 16'd69 || cand_sum[1] != 0) begin
          failures++; $display("FAIL figure example: %0d", cand_sum[0]);
        end
      end
    end
    finished = 1;
  end
endmodule
