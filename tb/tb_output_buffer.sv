// tb_output_buffer: writes 8 results per phase in random phase order and
// checks y[a*8+phase] = data[a], and that done pulses exactly after the write
// of phase 7 and at no other time.
module tb_output_buffer;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, wr_en, done;
  logic [2:0] wr_phase;
  logic signed [23:0] wr_data [8];
  logic signed [23:0] y [64];
  logic signed [23:0] m_y [64];
  int checks = 0, failures = 0;

  output_buffer #(.COLS(64), .COL_SHARE(8), .ACC_W(24)) dut (.*);

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; wr_en = 0; wr_phase = 0;
    for (int a = 0; a < 8; a++) wr_data[a] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < 64; c++) m_y[c] = 0;
    for (int i = 0; i < 100; i++) begin
      bit exp_done;
      wr_en = 1'($urandom);
      wr_phase = 3'($urandom);
      for (int a = 0; a < 8; a++) wr_data[a] = 24'($urandom);
      exp_done = wr_en && (wr_phase == 3'd7);
      @(negedge clk);
      if (wr_en) for (int a = 0; a < 8; a++) m_y[a * 8 + int'(wr_phase)] = wr_data[a];
      wr_en = 0;
      checks++;
      if (done !== exp_done) begin failures++; $display("FAIL done=%0d exp=%0d", done, exp_done); end
      for (int c = 0; c < 64; c++) begin
        checks++;
        if (y[c] !== m_y[c]) begin failures++; $display("FAIL y[%0d]=%0d exp=%0d", c, y[c], m_y[c]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
