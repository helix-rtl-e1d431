// Self-checking test of the read-vote unit.
// 1. The paper's example: ACTA, CTAG, GAGAT must give the consensus ACTAGAT.
// 2. Two reads with no common symbol are placed end to end.
// 3. Random jobs: overlapping windows of a random sequence with random
//    substitution errors, checked against a reference written here that finds
//    the longest common sub-string (first start in the later read, then lowest
//    start in the earlier one), places the reads and takes the majority vote
//    (ties to A, C, G, T in that order).
// Also checks the clock count of the example job.
module tb_read_vote;
  import helix_pkg::*;
  localparam int MR = 8, ML = 30;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic ld_we = 0, ld_len_we = 0; logic [2:0] ld_read; logic [4:0] ld_pos;
  dna_sym_e ld_sym; logic [4:0] ld_len;
  logic start = 0; logic [3:0] nreads;
  logic busy, cons_valid, cons_last, done;
  dna_sym_e cons_sym;
  logic [15:0] n_matched, n_unmatched;

  read_vote dut (.*);
  always #5 clk = ~clk;

  dna_sym_e reads [MR][ML];
  int       rlen  [MR];
  dna_sym_e got   [$];

  initial begin
    #50000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic dna_sym_e ch2sym(byte c);
    case (c) "A": return SYM_A; "C": return SYM_C; "G": return SYM_G; default: return SYM_T; endcase
  endfunction
  function automatic byte sym2ch(dna_sym_e s);
    case (s) SYM_A: return "A"; SYM_C: return "C"; SYM_G: return "G"; default: return "T"; endcase
  endfunction

  task automatic load(int nr);
    for (int r = 0; r < nr; r++) begin
      for (int p = 0; p < rlen[r]; p++) begin
        @(negedge clk); ld_we = 1; ld_read = 3'(r); ld_pos = 5'(p); ld_sym = reads[r][p];
      end
      @(negedge clk); ld_we = 0; ld_len_we = 1; ld_read = 3'(r); ld_len = 5'(rlen[r]);
      @(negedge clk); ld_len_we = 0;
    end
  endtask

  task automatic run(int nr, output int cyc);
    got.delete();
    @(negedge clk); start = 1; nreads = 4'(nr);
    @(negedge clk); start = 0; cyc = 1;
    while (!done) begin
      @(posedge clk); #1;
      if (cons_valid) got.push_back(cons_sym);
      cyc++;
    end
  endtask

  // Reference consensus.
  function automatic string reference(int nr);
    int off [MR]; int best, bi, bj, m, lo, hi; string s; int cnt [4]; int w;
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
    lo = off[0]; hi = off[0] + rlen[0];
    for (int r = 1; r < nr; r++) begin
      if (off[r] < lo) lo = off[r];
      if (off[r] + rlen[r] > hi) hi = off[r] + rlen[r];
    end
    s = "";
    for (int p = lo; p < hi; p++) begin
      cnt = '{0, 0, 0, 0};
      for (int r = 0; r < nr; r++)
        if (p >= off[r] && p < off[r] + rlen[r]) cnt[sym_index(reads[r][p - off[r]])]++;
      w = 0;
      for (int a = 1; a < 4; a++) if (cnt[a] > cnt[w]) w = a;
      s = {s, string'(sym2ch(index_sym(2'(w))))};
    end
    return s;
  endfunction

  function automatic string got_str();
    string s = "";
    foreach (got[i]) s = {s, string'(sym2ch(got[i]))};
    return s;
  endfunction

  task automatic set_read(int r, string s);
    rlen[r] = s.len();
    for (int p = 0; p < s.len(); p++) reads[r][p] = ch2sym(s[p]);
  endtask

  initial begin
    int cyc; string e, g; dna_sym_e genome [200];
    ld_read = 0; ld_pos = 0; ld_sym = SYM_A; ld_len = 0; nreads = 0;
    repeat (2) @(posedge clk); rst_n = 1;

    // 1. Figure example
    set_read(0, "ACTA"); set_read(1, "CTAG"); set_read(2, "GAGAT");
    load(3); run(3, cyc);
    g = got_str();
    checks++;
    if (g != "ACTAGAT") begin failures++; $display("FAIL example: %s", g); end
    else $display("example consensus %s in %0d clocks", g, cyc);
    checks++;
    if (cyc > 2 * (ML + 2 * 5 + 3) + 7 + 3) begin failures++; $display("FAIL example took %0d clocks", cyc); end

    // 2. No common symbol
    set_read(0, "AAAA"); set_read(1, "CCC");
    load(2); run(2, cyc);
    checks++;
    if (got_str() != "AAAACCC") begin failures++; $display("FAIL no-overlap: %s", got_str()); end

    // 3. Random jobs
    for (int n = 0; n < 12; n++) begin
      int nr, start_pos;
      nr = $urandom_range(MR, 2);
      foreach (genome[i]) genome[i] = index_sym(2'($urandom_range(3, 0)));
      start_pos = 0;
      for (int r = 0; r < nr; r++) begin
        rlen[r] = $urandom_range(ML, 10);
        for (int p = 0; p < rlen[r]; p++) begin
          reads[r][p] = genome[start_pos + p];
          if ($urandom_range(19, 0) == 0) reads[r][p] = index_sym(2'($urandom_range(3, 0)));
        end
        start_pos += $urandom_range(rlen[r] / 2, 1);
      end
      load(nr); run(nr, cyc);
      e = reference(nr); g = got_str();
      checks++;
      if (e != g) begin failures++; $display("FAIL random %0d:\n got %s\n exp %s", n, g, e); end
    end
    checks++;
    if (n_matched == 0 || n_unmatched == 0) begin
      failures++; $display("FAIL matched %0d unmatched %0d", n_matched, n_unmatched);
    end
    $display("pairs placed by match %0d, without match %0d", n_matched, n_unmatched);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
