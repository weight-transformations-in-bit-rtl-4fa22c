// tb_shift_add: feeds random column runs (8 activation bits x 4 row groups,
// random partial sums 0..16) with signed and unsigned activations and checks
// the accumulator against the two's-complement reconstruction
//   sum_l s_l 2^l ( sum_{k<7} 2^k p_k - 2^7 p_7 ),  s_7 = -1 if signed.
// Also checks that steps without valid leave the accumulator alone.
module tb_shift_add;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, valid, first, act_signed;
  logic [2:0] bit_idx;
  logic [4:0] psum [8];
  logic signed [23:0] acc;
  int checks = 0, failures = 0;

  shift_add #(.W_BITS(8), .A_BITS(8), .P_W(5), .ACC_W(24)) dut (.*);

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; valid = 0; first = 0; act_signed = 0; bit_idx = 0;
    for (int k = 0; k < 8; k++) psum[k] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int run = 0; run < 200; run++) begin
      longint exp;
      exp = 0;
      act_signed = 1'(run % 2);
      for (int l = 0; l < 8; l++)
        for (int g = 0; g < 4; g++) begin
          longint v;
          valid = 1; first = (l == 0 && g == 0); bit_idx = 3'(l);
          v = 0;
          for (int k = 0; k < 8; k++) begin
            psum[k] = (run < 4) ? 5'(16 * (run % 2)) : 5'($urandom_range(0, 16));
            if (k == 7) v -= longint'(psum[k]) * 128;
            else        v += longint'(psum[k]) * (longint'(1) << k);
          end
          if (act_signed && l == 7) exp -= v * 128;
          else                      exp += v * (longint'(1) << l);
          @(negedge clk);
          // an idle cycle now and then
          if ($urandom_range(0, 7) == 0) begin
            valid = 0;
            for (int k = 0; k < 8; k++) psum[k] = 5'($urandom_range(0, 16));
            @(negedge clk);
          end
        end
      valid = 0;
      checks++;
      if (longint'(acc) != exp) begin
        failures++;
        $display("FAIL run=%0d signed=%0d acc=%0d exp=%0d", run, act_signed, acc, exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
