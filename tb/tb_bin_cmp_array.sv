// Self-checking test of the binary comparator array: the paper's two-row
// example (rows "A" and "C", query "C": only row 0 senses current), then
// random stored sub-strings of random length and random queries, compared
// with a symbol-level reference (a row matches when every queried position
// holds the same symbol; positions past the stored length never match).
module tb_bin_cmp_array;
  import helix_pkg::*;
  localparam int ROWS = 256, COLS = 256, SYMS = COLS / 6;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, wr_en = 0;
  logic [7:0] wr_row;
  logic [COLS-1:0] wr_hrs, q_high, q_apply;
  logic [ROWS-1:0] mismatch;
  dna_sym_e store [ROWS][SYMS];
  int len [ROWS];
  dna_sym_e q [SYMS];
  int ql;

  bin_cmp_array #(.ROWS(ROWS), .COLS(COLS)) dut (.*);
  always #5 clk = ~clk;

  function automatic dna_sym_e rsym();
    return index_sym(2'($urandom_range(3, 0)));
  endfunction

  initial begin
    #10000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    wr_row = 0; wr_hrs = '0; q_high = '0; q_apply = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    // Figure example
    @(negedge clk); wr_en = 1; wr_row = 0; wr_hrs = '0; wr_hrs[5:0] = sym_pairs(SYM_A);
    @(negedge clk); wr_row = 1; wr_hrs = '0; wr_hrs[5:0] = sym_pairs(SYM_C);
    @(negedge clk); wr_en = 0;
    checks++;
    // Fig. 21 row C: LRS HRS, HRS LRS, LRS HRS (cell 0 first)
    if (wr_hrs[5:0] != 6'b100110) begin failures++; $display("FAIL cell pattern of C: %b", wr_hrs[5:0]); end
    q_high = '0; q_apply = '0; q_high[5:0] = sym_pairs(SYM_C); q_apply[5:0] = '1; #1;
    checks++;
    if (mismatch[1:0] != 2'b01) begin failures++; $display("FAIL figure example: %b", mismatch[1:0]); end
    // Random contents: short alphabet windows so that matches happen often.
    for (int r = 0; r < ROWS; r++) begin
      len[r] = $urandom_range(SYMS, 0);
      @(negedge clk); wr_en = 1; wr_row = 8'(r); wr_hrs = '0;
      for (int p = 0; p < SYMS; p++) begin
        store[r][p] = (p < 3) ? index_sym(2'((r + p) % 2)) : rsym();
        if (p < len[r]) wr_hrs[6*p +: 6] = sym_pairs(store[r][p]);
      end
    end
    @(negedge clk); wr_en = 0;
    for (int n = 0; n < 200; n++) begin
      ql = $urandom_range(3, 1);
      if (n % 10 == 0) ql = $urandom_range(SYMS, 1);
      q_high = '0; q_apply = '0;
      for (int p = 0; p < ql; p++) begin
        q[p] = index_sym(2'($urandom_range(1, 0)));
        q_high[6*p +: 6] = sym_pairs(q[p]); q_apply[6*p +: 6] = '1;
      end
      #1;
      for (int r = 0; r < ROWS; r++) begin
        bit m; m = 1;
        for (int p = 0; p < ql; p++) if (p >= len[r] || store[r][p] != q[p]) m = 0;
        checks++;
        if (mismatch[r] != !m) begin
          failures++; if (failures < 10) $display("FAIL query %0d row %0d: mismatch %b", n, r, mismatch[r]);
        end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
