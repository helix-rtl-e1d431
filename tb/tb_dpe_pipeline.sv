// Self-checking test of the five-stage dot-product engine.
// Programs random 2-bit weights, writes sparse random input slices to the
// input register, runs MAC-mode and CTC-mode jobs (CTC with random merge
// switches) and compares every output-register word with a reference that
// sums the bit-lines, clips each sum at the 5-bit ADC full scale, and shifts
// and adds. Checks that done comes S+3 clocks after the start clock for S
// slices (five stages) and that ADC saturation was exercised.
module tb_dpe_pipeline;
  import helix_pkg::*;
  localparam int N = 128, Q = 5, CPW = 3;
  int checks = 0, failures = 0, saturated = 0;
  logic clk = 0, rst_n = 0;
  logic ir_we = 0; logic [6:0] ir_waddr; logic [N-1:0] ir_wdata;
  logic xb_we = 0; logic [6:0] xb_row; logic [N-1:0][1:0] xb_data;
  logic start = 0; logic [6:0] in_base; logic [2:0] nslices; logic ctc_mode = 0;
  logic [N-2:0] merge_sw;
  logic busy, done;
  logic [6:0] or_raddr; logic [15:0] or_rdata;
  int g [N][N];
  logic [N-1:0] slice [Q];
  int exp [N];

  dpe_pipeline dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(int got, int e, string what);
    checks++;
    if (got != e) begin failures++; if (failures < 12) $display("FAIL %s: got %0d exp %0d", what, got, e); end
  endtask

  // Reference: bit-line sums, merge, ADC clip, shift-and-add.
  task automatic reference(input int ns, input bit ctc);
    int raw [N]; int bl [N]; int head; int s;
    for (int k = 0; k < N; k++) exp[k] = 0;
    for (int p = 0; p < ns; p++) begin
      for (int c = 0; c < N; c++) begin
        raw[c] = 0;
        for (int i = 0; i < N; i++) if (slice[p][i]) raw[c] += g[i][c];
        bl[c] = 0;
      end
      if (ctc) begin
        head = 0; s = 0;
        for (int c = 0; c < N; c++) begin
          if (c != 0 && !merge_sw[c-1]) begin bl[head] = s; s = 0; head = c; end
          s += raw[c];
        end
        bl[head] = s;
      end else for (int c = 0; c < N; c++) bl[c] = raw[c];
      for (int c = 0; c < N; c++) if (bl[c] > 31) begin bl[c] = 31; saturated++; end
      if (ctc) for (int k = 0; k < N; k++) exp[k] += bl[k] << p;
      else for (int k = 0; k < N / CPW; k++)
        for (int c = 0; c < CPW; c++) exp[k] += (bl[k*CPW + c] << (2*c)) << p;
    end
  endtask

  task automatic run_job(input int ns, input bit ctc, input int density);
    int lat;
    for (int p = 0; p < ns; p++) begin
      for (int i = 0; i < N; i++) slice[p][i] = ($urandom_range(127, 0) < density);
      @(negedge clk); ir_we = 1; ir_waddr = 7'(10 + p); ir_wdata = slice[p];
    end
    @(negedge clk); ir_we = 0;
    reference(ns, ctc);
    start = 1; in_base = 7'd10; nslices = 3'(ns); ctc_mode = ctc;
    @(posedge clk); #1 start = 0;
    lat = 0;
    while (!done) begin @(posedge clk); #1; lat++; end
    chk(lat, ns + 3, "latency (clocks from start to done)");
    @(negedge clk);
    for (int k = 0; k < N; k++) begin
      or_raddr = 7'(k); #1;
      chk(int'(or_rdata), exp[k], $sformatf("ctc=%0d out %0d", ctc, k));
    end
  endtask

  initial begin
    merge_sw = '0; ir_waddr = 0; ir_wdata = 0; xb_row = 0; xb_data = '0;
    in_base = 0; nslices = 0; or_raddr = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int r = 0; r < N; r++) begin
      @(negedge clk); xb_we = 1; xb_row = 7'(r);
      for (int c = 0; c < N; c++) begin g[r][c] = $urandom_range(3, 0); xb_data[c] = 2'(g[r][c]); end
    end
    @(negedge clk); xb_we = 0;
    run_job(5, 0, 6);
    run_job(5, 0, 12);
    run_job(1, 0, 8);
    for (int j = 0; j < N - 1; j++) merge_sw[j] = ($urandom_range(3, 0) == 0);
    run_job(5, 1, 4);
    run_job(3, 1, 10);
    checks++;
    if (saturated == 0) begin failures++; $display("FAIL ADC saturation never exercised"); end
    $display("ADC saturations: %0d", saturated);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
