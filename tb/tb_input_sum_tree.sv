// tb_input_sum_tree: the registered adder tree output equals the number of 1s
// in the previous cycle's 16 input bits; all-zero, all-one and random inputs.
module tb_input_sum_tree;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n;
  logic [15:0] in_bits;
  logic [4:0] sum_i;
  int checks = 0, failures = 0;

  input_sum_tree #(.N(16)) dut (.clk, .rst_n, .in_bits, .sum_i);

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; in_bits = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 1000; i++) begin
      int exp;
      if (i == 0) in_bits = '0;
      else if (i == 1) in_bits = '1;
      else in_bits = 16'($urandom);
      exp = 0;
      for (int b = 0; b < 16; b++) exp += int'(in_bits[b]);
      @(posedge clk); #1;
      checks++;
      if (int'(sum_i) != exp) begin
        failures++;
        $display("FAIL bits=%h sum=%0d exp=%0d", in_bits, sum_i, exp);
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
