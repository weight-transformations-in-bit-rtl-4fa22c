// tb_flip_mask_regs: reset clears both masks; col_flip and each b_flip slice
// take their written values and other slices keep theirs.
module tb_flip_mask_regs;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, cf_wr_en, bf_wr_en;
  logic [63:0] cf_wr_data, bf_wr_data, col_flip;
  logic [2:0] bf_wr_slice;
  logic [63:0] b_flip [8];
  logic [63:0] m_cf;
  logic [63:0] m_bf [8];
  int checks = 0, failures = 0;

  flip_mask_regs #(.W_BITS(8), .COLS(64)) dut (.*);

  task automatic compare();
    checks++;
    if (col_flip !== m_cf) begin failures++; $display("FAIL col_flip %h exp %h", col_flip, m_cf); end
    for (int k = 0; k < 8; k++) begin
      checks++;
      if (b_flip[k] !== m_bf[k]) begin failures++; $display("FAIL b_flip[%0d] %h exp %h", k, b_flip[k], m_bf[k]); end
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; cf_wr_en = 0; bf_wr_en = 0; cf_wr_data = '0; bf_wr_data = '0; bf_wr_slice = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    m_cf = '0;
    for (int k = 0; k < 8; k++) m_bf[k] = '0;
    compare();
    for (int i = 0; i < 200; i++) begin
      cf_wr_en = 1'($urandom); bf_wr_en = 1'($urandom);
      cf_wr_data = {$urandom, $urandom}; bf_wr_data = {$urandom, $urandom};
      bf_wr_slice = 3'($urandom);
      @(negedge clk);
      if (cf_wr_en) m_cf = cf_wr_data;
      if (bf_wr_en) m_bf[bf_wr_slice] = bf_wr_data;
      cf_wr_en = 0; bf_wr_en = 0;
      compare();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
