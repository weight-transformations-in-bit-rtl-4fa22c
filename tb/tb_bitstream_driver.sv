// tb_bitstream_driver: after loading random activations, for every bit l and
// row group g, the word lines of the group carry bit l of their rows'
// activations, every other word line is 0, and grp_bits repeats the group.
module tb_bitstream_driver;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, load;
  logic [7:0] act_in [64];
  logic [2:0] bit_idx;
  logic [1:0] grp;
  logic [63:0] wl;
  logic [15:0] grp_bits;
  logic [7:0] m_act [64];
  int checks = 0, failures = 0;

  bitstream_driver #(.A_BITS(8), .ROWS(64), .PWA_ROWS(16)) dut (.*);

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; load = 0; bit_idx = 0; grp = 0;
    for (int r = 0; r < 64; r++) act_in[r] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int v = 0; v < 4; v++) begin
      for (int r = 0; r < 64; r++) begin act_in[r] = 8'($urandom); m_act[r] = act_in[r]; end
      load = 1;
      @(negedge clk);
      load = 0;
      // inputs change without load: must not disturb the stored vector
      for (int r = 0; r < 64; r++) act_in[r] = 8'($urandom);
      @(negedge clk);
      for (int l = 0; l < 8; l++)
        for (int g = 0; g < 4; g++) begin
          logic [63:0] exp_wl;
          bit_idx = 3'(l); grp = 2'(g);
          #1;
          exp_wl = '0;
          for (int r = g * 16; r < g * 16 + 16; r++) exp_wl[r] = m_act[r][l];
          checks++;
          if (wl !== exp_wl) begin failures++; $display("FAIL l=%0d g=%0d wl=%h exp=%h", l, g, wl, exp_wl); end
          checks++;
          if (grp_bits !== exp_wl[g*16 +: 16]) begin failures++; $display("FAIL grp_bits l=%0d g=%0d", l, g); end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
