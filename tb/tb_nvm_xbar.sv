// Self-checking test of the crossbar model: random cells and word-line
// vectors are checked against a reference sum; then random merge-switch
// patterns must put each connected group's total on its lowest bit-line and
// zero on the others.
module tb_nvm_xbar;
  localparam int N = 128, CB = 2, BLW = 9;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, wr_en = 0;
  logic [6:0] wr_row;
  logic [N-1:0][CB-1:0] wr_data;
  logic [N-1:0] wl;
  logic [N-2:0] merge_sw;
  logic [N-1:0][BLW-1:0] bl;
  int g [N][N];
  int raw [N];

  nvm_xbar #(.N(N), .CELL_BITS(CB), .BL_W(BLW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    merge_sw = '0; wl = '0; wr_row = '0; wr_data = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int r = 0; r < N; r++) begin
      @(negedge clk); wr_en = 1; wr_row = 7'(r);
      for (int c = 0; c < N; c++) begin g[r][c] = $urandom_range(3, 0); wr_data[c] = CB'(g[r][c]); end
    end
    @(negedge clk); wr_en = 0;
    for (int n = 0; n < 20; n++) begin
      for (int i = 0; i < N; i++) wl[i] = 1'($urandom_range(1, 0));
      merge_sw = '0;
      if (n >= 10) for (int j = 0; j < N - 1; j++) merge_sw[j] = ($urandom_range(3, 0) != 0);
      #1;
      for (int c = 0; c < N; c++) begin
        raw[c] = 0;
        for (int i = 0; i < N; i++) if (wl[i]) raw[c] += g[i][c];
      end
      begin
        int head, s;
        int exp [N];
        head = 0; s = 0;
        for (int c = 0; c < N; c++) exp[c] = 0;
        for (int c = 0; c < N; c++) begin
          if (c != 0 && !merge_sw[c-1]) begin exp[head] = s; s = 0; head = c; end
          s += raw[c];
        end
        exp[head] = s;
        for (int c = 0; c < N; c++) begin
          checks++;
          if (int'(bl[c]) != (exp[c] % 512)) begin
            failures++;
            if (failures < 10) $display("FAIL vec %0d bl %0d: %0d exp %0d", n, c, bl[c], exp[c]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
