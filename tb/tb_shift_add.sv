// Self-checking test of the shift-and-add unit: random 5-bit codes over
// five passes in MAC mode (3 columns per weight) and CTC mode (one column per
// output) are compared with sums computed in the testbench.
module tb_shift_add;
  localparam int N = 128, Q = 5, CPW = 3, NW = N / CPW;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, valid = 0, first = 0, ctc_mode = 0;
  logic [2:0] pass;
  logic [N-1:0][4:0] code;
  logic [N-1:0][15:0] acc;
  int exp [N];

  shift_add #(.N(N), .ADC_BITS(5), .CELL_BITS(2), .Q(Q), .ACC_W(16)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    pass = 0; code = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int mode = 0; mode < 2; mode++) begin
      for (int k = 0; k < N; k++) exp[k] = 0;
      for (int p = 0; p < Q; p++) begin
        @(negedge clk);
        valid = 1; first = (p == 0); pass = 3'(p); ctc_mode = (mode == 1);
        for (int b = 0; b < N; b++) code[b] = 5'($urandom_range(31, 0));
        if (mode == 0) begin
          for (int k = 0; k < NW; k++)
            for (int c = 0; c < CPW; c++) exp[k] += int'(code[k*CPW + c]) * (1 << (2*c)) * (1 << p);
        end else begin
          for (int k = 0; k < N; k++) exp[k] += int'(code[k]) * (1 << p);
        end
      end
      @(negedge clk); valid = 0;
      for (int k = 0; k < N; k++) begin
        checks++;
        if (int'(acc[k]) != exp[k]) begin
          failures++;
          if (failures < 10) $display("FAIL mode %0d out %0d: %0d exp %0d", mode, k, acc[k], exp[k]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
