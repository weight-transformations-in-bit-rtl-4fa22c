// tb_flash_adc: checks the flash ADC model: code = min(current, 15), latched
// one clock after the current is presented, for every current 0..64.
module tb_flash_adc;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [6:0] i_col;
  logic [3:0] code;
  int checks = 0, failures = 0;

  flash_adc #(.ADC_BITS(4), .IN_W(7)) dut (.clk, .i_col, .code);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    i_col = 0;
    @(negedge clk);
    for (int i = 0; i <= 64; i++) begin
      int exp;
      i_col = 7'(i);
      exp = (i > 15) ? 15 : i;
      @(posedge clk); #1;
      checks++;
      if (int'(code) != exp) begin
        failures++;
        $display("FAIL i=%0d code=%0d exp=%0d", i, code, exp);
      end
      // the code must hold until the next edge even if the input moves
      i_col = 7'(64 - i);
      #2;
      checks++;
      if (int'(code) != exp) begin
        failures++;
        $display("FAIL latch i=%0d code=%0d", i, code);
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
