// Self-checking test of the CTC beam-step sequencer on the dot-product
// engine, at the figure's width 2 (including its worked example) and at the
// evaluated width 10. Also checks the step's clock count.
module tb_ctc_ctrl;
  logic clk = 0, rst_n = 0, go = 0;
  int c2, f2, m2, c10, f10, m10;
  logic fin2, fin10;
  int checks, failures;
  always #5 clk = ~clk;

  ctc_bench #(.W(2),  .NRUN(4), .FIG(1)) b2  (.clk, .rst_n, .go, .checks(c2),  .failures(f2),  .merges(m2),  .finished(fin2));
  ctc_bench #(.W(10), .NRUN(3), .FIG(0)) b10 (.clk, .rst_n, .go, .checks(c10), .failures(f10), .merges(m10), .finished(fin10));

  initial begin
    #2000000;
    $display("TB_RESULT checks=%0d failures=%0d", c2 + c10, f2 + f10 + 1); $finish;
  end

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk); go = 1;
    wait (fin2 && fin10);
    checks = c2 + c10 + 1; failures = f2 + f10;
    if (m2 == 0 || m10 == 0) failures++;   // merge switches must have been used
    $display("merge switches closed: W=2 %0d, W=10 %0d", m2, m10);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
