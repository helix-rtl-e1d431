// End-to-end test of helix_top at its default sizes (128x128 crossbar,
// beam width 10, 8 reads of up to 30 bases, 256x256 comparator array).
// It runs a base-calling sequence on the one engine:
//   1 an FC-style layer: 5-bit weights over 3 columns, 5-bit inputs over 5
//     slices, in MAC mode; results checked against a reference that clips
//     each bit-line at the ADC full scale (saturation is counted);
//   2 a CTC beam step of width 10 with random merges, run by the CTC
//     sequencer on the same engine (so the engine is handed over and back);
//   3 a second MAC job after the CTC step, which must see the CTC rows it
//     overwrote (rows 0..99 now hold only the diagonal);
//   4 a read vote of overlapping reads, with a pair that has no common symbol.
// Each mechanism is counted and a failure is counted for any that never ran.
module tb_helix_top;
  import helix_pkg::*;
  localparam int N = 128, Q = 5, W = 10, WW = 100, CPW = 3, ML = 30, MR = 8;
  int checks = 0, failures = 0;
  int n_mac = 0, n_sat = 0, n_ctc = 0, n_merge = 0, n_handover = 0;
  logic clk = 0, rst_n = 0;
  logic ir_we = 0; logic [6:0] ir_waddr = 0; logic [N-1:0] ir_wdata = '0;
  logic xb_we = 0; logic [6:0] xb_row = 0; logic [N-1:0][1:0] xb_data = '0;
  logic mac_start = 0; logic [6:0] mac_base = 0; logic [2:0] mac_nslices = 0;
  logic mac_ctc_mode = 0; logic [N-2:0] mac_merge_sw = '0;
  logic dpe_busy, dpe_done; logic [6:0] or_raddr = 0; logic [15:0] or_rdata;
  logic ctc_start = 0; logic [W-1:0][Q-1:0] ctc_p_prev = '0; logic [W-1:0][1:0] ctc_p_cur = '0;
  logic [WW-2:0] ctc_merge_sw = '0; logic ctc_busy, ctc_done; logic [WW-1:0][15:0] ctc_cand_sum;
  logic rv_ld_we = 0, rv_ld_len_we = 0; logic [2:0] rv_ld_read = 0; logic [4:0] rv_ld_pos = 0;
  dna_sym_e rv_ld_sym = SYM_A; logic [4:0] rv_ld_len = 0; logic rv_start = 0; logic [3:0] rv_nreads = 0;
  logic rv_busy, rv_cons_valid, rv_cons_last, rv_done; dna_sym_e rv_cons_sym;
  logic [15:0] rv_n_matched, rv_n_unmatched;

  helix_top dut (.*);
  always #5 clk = ~clk;

  int g [N][N];
  int wt [N/CPW][N];      // 5-bit weights
  int x [N];              // 5-bit inputs
  int exp [N];

  initial begin
    #20000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(int got, int e, string what);
    checks++;
    if (got != e) begin failures++; if (failures < 12) $display("FAIL %s: got %0d exp %0d", what, got, e); end
  endtask

  task automatic mac_job();
    int bl;
    for (int p = 0; p < Q; p++) begin
      @(negedge clk); ir_we = 1; ir_waddr = 7'(p);
      for (int i = 0; i < N; i++) ir_wdata[i] = 1'((x[i] >> p) & 1);
    end
    @(negedge clk); ir_we = 0;
    for (int k = 0; k < N; k++) exp[k] = 0;
    for (int p = 0; p < Q; p++)
      for (int c = 0; c < N; c++) begin
        bl = 0;
        for (int i = 0; i < N; i++) if (((x[i] >> p) & 1) != 0) bl += g[i][c];
        if (bl > 31) begin bl = 31; n_sat++; end
        if (c / CPW < N / CPW) exp[c / CPW] += (bl << (2 * (c % CPW))) << p;
      end
    mac_start = 1; mac_base = 0; mac_nslices = 3'(Q); mac_ctc_mode = 0;
    @(negedge clk); mac_start = 0;
    while (!dpe_done) @(negedge clk);
    for (int k = 0; k < N; k++) begin
      or_raddr = 7'(k); #1; chk(int'(or_rdata), exp[k], $sformatf("MAC out %0d", k));
    end
    n_mac++;
  endtask

  initial begin
    rv_ld_sym = SYM_A;
    repeat (3) @(posedge clk); rst_n = 1;

    // 1. program a layer: weight k of row i in columns 3k..3k+2
    for (int i = 0; i < N; i++) begin
      for (int c = 0; c < N; c++) g[i][c] = 0;
      for (int k = 0; k < N / CPW; k++) begin
        wt[k][i] = $urandom_range(31, 0);
        for (int c = 0; c < CPW; c++) g[i][CPW*k + c] = (wt[k][i] >> (2*c)) & 3;
      end
      @(negedge clk); xb_we = 1; xb_row = 7'(i);
      for (int c = 0; c < N; c++) xb_data[c] = 2'(g[i][c]);
    end
    @(negedge clk); xb_we = 0;
    for (int i = 0; i < N; i++) x[i] = ($urandom_range(15, 0) == 0) ? $urandom_range(31, 0) : 0;
    mac_job();

    // 2. CTC beam step
    begin
      int prod [WW]; int bl [WW]; int e [WW]; int head, s, ii;
      for (int a = 0; a < W; a++) begin
        ctc_p_prev[a] = 5'($urandom_range(31, 0)); ctc_p_cur[a] = 2'($urandom_range(3, 0));
      end
      for (int d = 0; d < WW - 1; d++) begin
        ctc_merge_sw[d] = ($urandom_range(2, 0) == 0); if (ctc_merge_sw[d]) n_merge++;
      end
      for (int d = 0; d < WW; d++) e[d] = 0;
      for (int b = 0; b < Q; b++) begin
        for (int d = 0; d < WW; d++) begin
          ii = d % W; if ((d / W) % 2 == 1) ii = W - 1 - ii;
          prod[d] = ctc_p_prev[ii][b] ? int'(ctc_p_cur[d / W]) : 0; bl[d] = 0;
        end
        head = 0; s = 0;
        for (int d = 0; d < WW; d++) begin
          if (d != 0 && !ctc_merge_sw[d-1]) begin bl[head] = s; s = 0; head = d; end
          s += prod[d];
        end
        bl[head] = s;
        for (int d = 0; d < WW; d++) e[d] += (bl[d] > 31 ? 31 : bl[d]) << b;
      end
      @(negedge clk); ctc_start = 1; @(negedge clk); ctc_start = 0;
      while (!ctc_done) begin @(negedge clk); if (ctc_busy && dpe_busy) n_handover = 1; end
      for (int d = 0; d < WW; d++) chk(int'(ctc_cand_sum[d]), e[d], $sformatf("CTC cand %0d", d));
      n_ctc++;
      // the CTC step rewrote rows 0..WW-1: only the diagonal remains
      for (int i = 0; i < WW; i++)
        for (int c = 0; c < N; c++) g[i][c] = (c == i) ? int'(ctc_p_cur[i / W]) : 0;
    end

    // 3. MAC again after the hand-back
    for (int i = 0; i < N; i++) x[i] = $urandom_range(31, 1);
    mac_job();

    // 4. read vote
    begin
      dna_sym_e genome [120]; dna_sym_e reads [MR][ML]; int rlen [MR]; int sp, nr;
      int off [MR]; int best, bi, bj, m, lo, hi, w; int cnt [4];
      dna_sym_e want [$]; dna_sym_e got [$];
      nr = MR;
      foreach (genome[i]) genome[i] = index_sym(2'($urandom_range(3, 0)));
      sp = 0;
      for (int r = 0; r < nr; r++) begin
        rlen[r] = $urandom_range(ML, 10);
        for (int p = 0; p < rlen[r]; p++) begin
          reads[r][p] = genome[sp + p];
          if ($urandom_range(24, 0) == 0) reads[r][p] = index_sym(2'($urandom_range(3, 0)));
        end
        sp += $urandom_range(rlen[r] / 2, 2);
      end
      // last pair shares no symbol: read 7 is all C, read 6 has no C
      for (int p = 0; p < rlen[6]; p++) if (reads[6][p] == SYM_C) reads[6][p] = SYM_G;
      for (int p = 0; p < rlen[7]; p++) reads[7][p] = SYM_C;
      for (int r = 0; r < nr; r++) begin
        for (int p = 0; p < rlen[r]; p++) begin
          @(negedge clk); rv_ld_we = 1; rv_ld_read = 3'(r); rv_ld_pos = 5'(p); rv_ld_sym = reads[r][p];
        end
        @(negedge clk); rv_ld_we = 0; rv_ld_len_we = 1; rv_ld_read = 3'(r); rv_ld_len = 5'(rlen[r]);
        @(negedge clk); rv_ld_len_we = 0;
      end
      // reference
      off[0] = 0;
      for (int k = 0; k + 1 < nr; k++) begin
        best = 0; bi = 0; bj = 0;
        for (int j = 0; j < rlen[k+1]; j++)
          for (int i = 0; i < rlen[k]; i++) begin
            m = 0;
            while (i + m < rlen[k] && j + m < rlen[k+1] && reads[k][i+m] == reads[k+1][j+m]) m++;
            if (m > best) begin best = m; bi = i; bj = j; end
          end
        off[k+1] = (best > 0) ? off[k] + bi - bj : off[k] + rlen[k];
      end
      lo = 0; hi = rlen[0];
      for (int r = 1; r < nr; r++) begin
        if (off[r] < lo) lo = off[r];
        if (off[r] + rlen[r] > hi) hi = off[r] + rlen[r];
      end
      for (int p = lo; p < hi; p++) begin
        cnt = '{0, 0, 0, 0};
        for (int r = 0; r < nr; r++)
          if (p >= off[r] && p < off[r] + rlen[r]) cnt[sym_index(reads[r][p - off[r]])]++;
        w = 0;
        for (int a = 1; a < 4; a++) if (cnt[a] > cnt[w]) w = a;
        want.push_back(index_sym(2'(w)));
      end
      @(negedge clk); rv_start = 1; rv_nreads = 4'(nr); @(negedge clk); rv_start = 0;
      while (!rv_done) begin @(posedge clk); #1; if (rv_cons_valid) got.push_back(rv_cons_sym); end
      chk(got.size(), want.size(), "consensus length");
      foreach (want[i]) if (i < got.size()) chk(int'(got[i]), int'(want[i]), $sformatf("consensus %0d", i));
    end

    $display("mechanisms: MAC jobs %0d, ADC saturations %0d, CTC steps %0d, merge switches %0d, engine hand-over %0d, read pairs matched %0d, unmatched %0d",
             n_mac, n_sat, n_ctc, n_merge, n_handover, rv_n_matched, rv_n_unmatched);
    checks++;
    if (n_mac == 0 || n_sat == 0 || n_ctc == 0 || n_merge == 0 || n_handover == 0 ||
        rv_n_matched == 0 || rv_n_unmatched == 0) begin
      failures++; $display("FAIL a mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
