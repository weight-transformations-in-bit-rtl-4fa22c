// tb_column_peripheral: runs back-to-back columns of 32 steps through one lane
// in each mode with random ADC codes, sum(I), b_flip and col_flip bits, and
// checks res against a reference that applies bit-flip before and sign-flip
// after the shift-and-add; res_valid must pulse exactly one clock after the
// last step of each column.
module tb_column_peripheral;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, act_signed, valid, first, last, col_flip_col, res_valid;
  cim_pkg::flip_mode_e mode;
  logic [2:0] bit_idx;
  logic [3:0] adc_code [8];
  logic [4:0] sum_i;
  logic [7:0] b_flip_col;
  logic signed [23:0] res;
  int checks = 0, failures = 0, n_neg = 0, n_sub = 0;

  column_peripheral #(.W_BITS(8), .A_BITS(8), .ADC_BITS(4), .SUM_W(5), .ACC_W(24)) dut (.*);

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint exp;
    rst_n = 0; valid = 0; first = 0; last = 0; act_signed = 0; col_flip_col = 0;
    mode = cim_pkg::MODE_CVM; bit_idx = 0; sum_i = 0; b_flip_col = 0;
    for (int k = 0; k < 8; k++) adc_code[k] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int col = 0; col < 60; col++) begin
      logic [7:0] bf;
      bit cf;
      mode = cim_pkg::flip_mode_e'(col % 3);
      act_signed = 1'((col / 3) % 2);
      bf = 8'($urandom);
      cf = 1'($urandom);
      exp = 0;
      for (int l = 0; l < 8; l++)
        for (int g = 0; g < 4; g++) begin
          longint v;
          int s;
          valid = 1; first = (l == 0 && g == 0); last = (l == 7 && g == 3); bit_idx = 3'(l);
          s = $urandom_range(0, 16);
          sum_i = 5'(s);
          b_flip_col = bf; col_flip_col = cf;
          v = 0;
          for (int k = 0; k < 8; k++) begin
            int c, p;
            c = $urandom_range(0, (s > 15) ? 15 : s);
            adc_code[k] = 4'(c);
            p = (mode == cim_pkg::MODE_BIT_FLIP && bf[k]) ? s - c : c;
            if (k == 7) v -= longint'(p) * 128; else v += longint'(p) * (longint'(1) << k);
          end
          if (act_signed && l == 7) exp -= v * 128; else exp += v * (longint'(1) << l);
          @(negedge clk);
          // the column's result appears one clock after its last step
          checks++;
          if (l == 7 && g == 3) begin
            if (mode == cim_pkg::MODE_SIGN_FLIP && cf) begin exp = -exp; n_neg++; end
            if (mode == cim_pkg::MODE_BIT_FLIP && bf != 0) n_sub++;
            if (!res_valid || longint'(res) != exp) begin
              failures++;
              $display("FAIL col=%0d res_valid=%0d res=%0d exp=%0d", col, res_valid, res, exp);
            end
          end else if (res_valid) begin
            failures++;
            $display("FAIL spurious res_valid col=%0d l=%0d g=%0d", col, l, g);
          end
        end
    end
    valid = 0; first = 0; last = 0;
    @(negedge clk);
    checks++;
    if (res_valid) begin failures++; $display("FAIL res_valid held"); end
    checks++;
    if (n_neg == 0 || n_sub == 0) begin failures++; $display("FAIL corrections not exercised"); end
    $display("negated columns %0d, bit-flipped columns %0d", n_neg, n_sub);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
