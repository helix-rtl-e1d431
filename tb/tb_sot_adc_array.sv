// Self-checking test of the SOT-MRAM ADC array model: for random inputs each
// row must switch exactly the cells whose threshold k*LSB the input reaches,
// and inputs past full scale must switch every cell (saturation).
module tb_sot_adc_array;
  localparam int ROWS = 32, LEVELS = 32, IN_W = 9, LSB = 3;
  int checks = 0, failures = 0;
  logic [ROWS-1:0][IN_W-1:0]   vin;
  logic [ROWS-1:0][LEVELS-1:0] therm;
  sot_adc_array #(.ROWS(ROWS), .LEVELS(LEVELS), .IN_W(IN_W), .LSB(LSB)) dut (.vin, .therm);

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int n = 0; n < 40; n++) begin
      for (int r = 0; r < ROWS; r++) vin[r] = IN_W'($urandom_range(120, 0));
      if (n == 0) vin[0] = 9'd511;
      #1;
      for (int r = 0; r < ROWS; r++) begin
        int lvl; logic [LEVELS-1:0] exp;
        lvl = int'(vin[r]) / LSB;
        if (lvl > LEVELS - 1) lvl = LEVELS - 1;
        exp = LEVELS'((64'd1 << (lvl + 1)) - 1);
        checks++;
        if (therm[r] !== exp) begin
          failures++; $display("FAIL row %0d vin %0d: %b exp %b", r, vin[r], therm[r], exp);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
