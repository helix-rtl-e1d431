// Read-vote unit: builds a consensus read from consecutive overlapping reads.
//
// The base-caller emits reads that overlap their neighbours. For each pair of
// consecutive reads R_k, R_k+1 the unit finds their longest common sub-string
// with the binary comparator array, uses it to place R_k+1 relative to R_k,
// and finally takes a majority vote over all reads at every position.
//   write:  row i of the comparator array gets the suffix R_k[i..]; positions
//           past the suffix stay unwritten (they mismatch any query). All
//           MAX_LEN rows are rewritten, one per clock.
//   search: the query R_k+1[j .. j+l-1] is applied at symbol positions
//           0..l-1, one search per clock. A row without mismatch means
//           R_k[i..i+l-1] = R_k+1[j..j+l-1]. The search grows l while some row
//           matches and otherwise moves on to the next j, trying only lengths
//           longer than the best found so far. The lowest matching row wins.
//   place:  offset(R_k+1) = offset(R_k) + i_best - j_best; with no common
//           symbol at all, R_k+1 is placed right after R_k.
//   vote:   for every position from the leftmost to the rightmost read end,
//           each covering read votes its symbol; the most frequent symbol is
//           emitted, ties going to the earlier of A, C, G, T.
// The paper gives the three steps (longest match, align, vote), the 3-bit
// symbol codes and the comparator array; the search order, placement rule,
// tie rule, buffer sizes and interface are this design's own. MAX_LEN = 30
// follows the paper's 10 to 30 bases per read; MAX_READS = 8 is assumed.
// Interface: reads are loaded with ld_we (symbol ld_sym at position ld_pos of
// read ld_read) and ld_len_we (length of read ld_read); start with nreads >= 1
// runs the vote, which streams the consensus on cons_valid/cons_sym with
// cons_last on its final symbol, then pulses done. Reads must not be loaded
// while busy.
module read_vote
  import helix_pkg::*;
#(
  parameter int unsigned MAX_READS = 8,
  parameter int unsigned MAX_LEN   = 30,
  parameter int unsigned ROWS      = 256,
  parameter int unsigned COLS      = 256
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic                             ld_we,
  input  logic                             ld_len_we,
  input  logic [$clog2(MAX_READS)-1:0]     ld_read,
  input  logic [$clog2(MAX_LEN)-1:0]       ld_pos,
  input  dna_sym_e                         ld_sym,
  input  logic [$clog2(MAX_LEN+1)-1:0]     ld_len,
  input  logic                             start,
  input  logic [$clog2(MAX_READS+1)-1:0]   nreads,
  output logic                             busy,
  output logic                             cons_valid,
  output dna_sym_e                         cons_sym,
  output logic                             cons_last,
  output logic                             done,
  // statistics: pairs placed by a match and pairs with no common symbol
  output logic [15:0]                      n_matched,
  output logic [15:0]                      n_unmatched
);
  localparam int unsigned RW  = $clog2(MAX_READS);
  localparam int unsigned PW  = $clog2(MAX_LEN + 1);
  localparam int unsigned OW  = $clog2(MAX_READS * MAX_LEN) + 2;  // signed offsets
  localparam int unsigned SP  = 2 * SYM_BITS;
  localparam int unsigned AR  = $clog2(ROWS);

  typedef enum logic [2:0] {IDLE, WRITE, SEARCH, PLACE, SPAN, VOTE, FINISH} state_e;

  dna_sym_e                 rd_buf [MAX_READS][MAX_LEN];
  logic [PW-1:0]            rd_len [MAX_READS];
  logic signed [OW-1:0]     rd_off [MAX_READS];

  state_e                   state;
  logic [RW:0]              nr, k;             // reads in the job, current pair (k, k+1)
  logic [PW-1:0]            row;               // write row
  logic [PW-1:0]            j, l;              // query start and length
  logic [PW-1:0]            best_len, best_i, best_j;
  logic signed [OW-1:0]     pos, last_pos;

  // comparator array signals
  logic                     cmp_we;
  logic [AR-1:0]            cmp_row;
  logic [COLS-1:0]          cmp_hrs, q_high, q_apply;
  logic [ROWS-1:0]          mismatch;
  logic                     any_match;
  logic [AR-1:0]            match_row;

  bin_cmp_array #(.ROWS(ROWS), .COLS(COLS)) u_cmp (
    .clk, .rst_n, .wr_en(cmp_we), .wr_row(cmp_row), .wr_hrs(cmp_hrs),
    .q_high, .q_apply, .mismatch
  );

  // Load port
  always_ff @(posedge clk) begin
    if (ld_we)     rd_buf[ld_read][ld_pos] <= ld_sym;
  end
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) for (int unsigned r = 0; r < MAX_READS; r++) rd_len[r] <= '0;
    else if (ld_len_we) rd_len[ld_read] <= ld_len;

  // Row data for the write phase: suffix of read k starting at 'row'.
  always_comb begin
    cmp_we  = (state == WRITE);
    cmp_row = AR'(row);
    cmp_hrs = '0;
    for (int unsigned p = 0; p < MAX_LEN; p++)
      if (int'(row) + p < int'(rd_len[k[RW-1:0]]) && SP*(p+1) <= COLS)
        cmp_hrs[SP*p +: SP] = sym_pairs(rd_buf[k[RW-1:0]][int'(row) + p]);
  end

  // Query for the search phase: R_k+1[j .. j+l-1] at positions 0..l-1.
  always_comb begin
    q_high  = '0;
    q_apply = '0;
    for (int unsigned p = 0; p < MAX_LEN; p++)
      if (p < int'(l) && int'(j) + p < MAX_LEN && SP*(p+1) <= COLS) begin
        q_high[SP*p +: SP]  = sym_pairs(rd_buf[k[RW-1:0] + 1'b1][int'(j) + p]);
        q_apply[SP*p +: SP] = '1;
      end
  end

  // Lowest matching row among the rows that hold suffixes.
  always_comb begin
    any_match = 1'b0;
    match_row = '0;
    for (int r = MAX_LEN - 1; r >= 0; r--)
      if (!mismatch[r]) begin any_match = 1'b1; match_row = AR'(r); end
  end

  // Vote at position 'pos'.
  logic [RW+1:0] votes [4];
  dna_sym_e      winner;
  logic [1:0]    best, si;
  always_comb begin
    best = 2'd0;
    si   = 2'd0;
    for (int unsigned s = 0; s < 4; s++) votes[s] = '0;
    for (int unsigned r = 0; r < MAX_READS; r++)
      if (r < int'(nr) && pos >= rd_off[r] && pos < rd_off[r] + OW'(rd_len[r])) begin
        si = sym_index(rd_buf[r][PW'(pos - rd_off[r])]);
        votes[si] = votes[si] + 1'b1;
      end
    for (int unsigned s = 1; s < 4; s++) if (votes[s] > votes[best]) best = 2'(s);
    winner = index_sym(best);
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      state <= IDLE; nr <= '0; k <= '0; row <= '0; j <= '0; l <= '0;
      best_len <= '0; best_i <= '0; best_j <= '0; pos <= '0; last_pos <= '0;
      cons_valid <= 1'b0; cons_sym <= SYM_A; cons_last <= 1'b0; done <= 1'b0;
      n_matched <= '0; n_unmatched <= '0;
      for (int unsigned r = 0; r < MAX_READS; r++) rd_off[r] <= '0;
    end else begin
      cons_valid <= 1'b0;
      cons_last  <= 1'b0;
      done       <= 1'b0;
      unique case (state)
        IDLE: if (start && nreads != 0) begin
          nr <= (RW+1)'(nreads); k <= '0; rd_off[0] <= '0; row <= '0;
          state <= (nreads > 1) ? WRITE : SPAN;
        end
        WRITE: begin
          row <= row + 1'b1;
          if (row == PW'(MAX_LEN - 1)) begin
            j <= '0; l <= PW'(1); best_len <= '0; best_i <= '0; best_j <= '0;
            state <= SEARCH;
          end
        end
        SEARCH: begin
          if (int'(j) + int'(l) > int'(rd_len[k[RW-1:0] + 1'b1]) || int'(l) > MAX_LEN)
            state <= PLACE;                       // nothing longer can fit
          else if (any_match) begin
            best_len <= l; best_i <= PW'(match_row); best_j <= j;
            l <= l + 1'b1;
          end else begin
            j <= j + 1'b1;
            l <= best_len + 1'b1;
          end
        end
        PLACE: begin
          if (best_len != 0) begin
            rd_off[k[RW-1:0] + 1'b1] <= rd_off[k[RW-1:0]] + OW'(best_i) - OW'(best_j);
            n_matched <= n_matched + 1'b1;
          end else begin
            rd_off[k[RW-1:0] + 1'b1] <= rd_off[k[RW-1:0]] + OW'(rd_len[k[RW-1:0]]);
            n_unmatched <= n_unmatched + 1'b1;
          end
          k <= k + 1'b1; row <= '0;
          state <= (k + (RW+1)'(2) == nr) ? SPAN : WRITE;
        end
        SPAN: begin                                // leftmost start, rightmost end
          logic signed [OW-1:0] lo, hi;
          lo = rd_off[0];
          hi = rd_off[0] + OW'(rd_len[0]);
          for (int unsigned r = 1; r < MAX_READS; r++)
            if (r < int'(nr)) begin
              if (rd_off[r] < lo) lo = rd_off[r];
              if (rd_off[r] + OW'(rd_len[r]) > hi) hi = rd_off[r] + OW'(rd_len[r]);
            end
          pos <= lo; last_pos <= hi - 1'b1;
          state <= VOTE;
        end
        VOTE: begin
          cons_valid <= 1'b1;
          cons_sym   <= winner;
          cons_last  <= (pos == last_pos);
          pos        <= pos + 1'b1;
          if (pos == last_pos) state <= FINISH;
        end
        FINISH: begin done <= 1'b1; state <= IDLE; end
        default: state <= IDLE;
      endcase
    end

  assign busy = (state != IDLE);

  a_no_load_busy: assert property (@(posedge clk) disable iff (!rst_n) (ld_we || ld_len_we) |-> !busy);
  initial assert (MAX_LEN * SP <= COLS && MAX_LEN <= ROWS)
    else $error("comparator array too small for %0d-symbol reads", MAX_LEN);
endmodule
