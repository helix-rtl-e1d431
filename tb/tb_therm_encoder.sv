// Self-checking test of therm_encoder: every clean thermometer code of a
// 32-level row must encode to its level (switched cells minus one), a 4-level
// instance must give the paper's 1000/1100/1110/1111 -> 0/1/2/3, and bubbles
// below the top switched cell must not change the result.
module tb_therm_encoder;
  int checks = 0, failures = 0;
  logic [31:0] th;  logic [4:0] code;
  logic [3:0]  th4; logic [1:0] code4;
  therm_encoder #(.LEVELS(32)) dut  (.therm(th),  .code(code));
  therm_encoder #(.LEVELS(4))  dut4 (.therm(th4), .code(code4));

  task automatic chk(int got, int exp, string what);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d exp %0d", what, got, exp); end
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int l = 0; l < 32; l++) begin
      th = 32'((64'd1 << (l + 1)) - 1); #1;
      chk(int'(code), l, $sformatf("level %0d", l));
    end
    // The figure's strings list cell 0 first: 1000 -> only cell 0 switched.
    th4 = 4'b0001; #1; chk(int'(code4), 0, "1000");
    th4 = 4'b0011; #1; chk(int'(code4), 1, "1100");
    th4 = 4'b0111; #1; chk(int'(code4), 2, "1110");
    th4 = 4'b1111; #1; chk(int'(code4), 3, "1111");
    for (int n = 0; n < 50; n++) begin
      int l;
      l = $urandom_range(31, 1);
      th = 32'((64'd1 << (l + 1)) - 1);
      th[$urandom_range(l - 1, 0)] = 1'b0;  // bubble below the top
      #1; chk(int'(code), l, "bubble");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
