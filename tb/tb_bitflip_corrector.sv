// tb_bitflip_corrector: exhaustive check of the bit-flip subtractor and mux:
// psum = flip ? sum_i - adc_code : adc_code, for every code 0..15 and every
// sum(I) from the code up to 16.
module tb_bitflip_corrector;
  logic [3:0] adc_code;
  logic [4:0] sum_i, psum;
  logic flip;
  int checks = 0, failures = 0;

  bitflip_corrector #(.ADC_BITS(4), .SUM_W(5)) dut (.adc_code, .sum_i, .flip, .psum);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < 16; c++)
      for (int s = c; s <= 16; s++)
        for (int f = 0; f < 2; f++) begin
          int exp;
          adc_code = 4'(c); sum_i = 5'(s); flip = f[0];
          #1;
          exp = f ? (s - c) : c;
          checks++;
          if (int'(psum) != exp) begin
            failures++;
            $display("FAIL c=%0d s=%0d f=%0d psum=%0d exp=%0d", c, s, f, psum, exp);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
