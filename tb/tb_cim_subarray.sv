// tb_cim_subarray: programs random bits and random stuck-at faults into the
// crossbar model, drives random word-line patterns and checks every column
// current routed to the 8 ADC outputs against an independent count that
// applies the faults (SA1 conducts, SA0 never does).
module tb_cim_subarray;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en, flt_wr_en;
  logic [5:0] wr_row, flt_row;
  logic [63:0] wr_data, flt_sa0, flt_sa1, wl;
  logic [2:0] col_sel;
  logic [6:0] col_current [8];
  logic [63:0] m_bits [64], m_sa0 [64], m_sa1 [64];
  int checks = 0, failures = 0, stuck_hits = 0;

  cim_subarray #(.ROWS(64), .COLS(64), .COL_SHARE(8)) dut (.*);

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all();
    for (int s = 0; s < 8; s++) begin
      col_sel = 3'(s);
      #1;
      for (int a = 0; a < 8; a++) begin
        int c, n;
        c = a * 8 + s;
        n = 0;
        for (int r = 0; r < 64; r++) begin
          bit v;
          v = m_bits[r][c];
          if (m_sa1[r][c]) v = 1;
          if (m_sa0[r][c]) v = 0;
          if (wl[r] && v) n++;
          if (wl[r] && (m_sa0[r][c] || m_sa1[r][c]) && (m_bits[r][c] != v)) stuck_hits++;
        end
        checks++;
        if (int'(col_current[a]) != n) begin
          failures++;
          $display("FAIL col=%0d got=%0d exp=%0d", c, col_current[a], n);
        end
      end
    end
  endtask

  initial begin
    wr_en = 0; flt_wr_en = 0; wr_row = 0; flt_row = 0; wr_data = 0; flt_sa0 = 0; flt_sa1 = 0;
    wl = 0; col_sel = 0;
    @(negedge clk);
    for (int r = 0; r < 64; r++) begin
      wr_en = 1; wr_row = 6'(r); wr_data = {$urandom, $urandom}; m_bits[r] = wr_data;
      m_sa0[r] = '0; m_sa1[r] = '0;
      @(negedge clk);
    end
    wr_en = 0;
    // fault-free first
    for (int t = 0; t < 10; t++) begin
      wl = {$urandom, $urandom};
      check_all();
    end
    // inject about 6% stuck cells, half SA0 and half SA1
    for (int r = 0; r < 64; r++) begin
      logic [63:0] f, pol;
      f = {$urandom, $urandom} & {$urandom, $urandom} & {$urandom, $urandom} & {$urandom, $urandom};
      pol = {$urandom, $urandom};
      flt_wr_en = 1; flt_row = 6'(r); flt_sa0 = f & ~pol; flt_sa1 = f & pol;
      m_sa0[r] = flt_sa0; m_sa1[r] = flt_sa1;
      @(negedge clk);
    end
    flt_wr_en = 0;
    for (int t = 0; t < 20; t++) begin
      // PWA-like patterns: one 16-row group, and full random
      wl = (t % 2 == 0) ? ({$urandom, $urandom} & (64'hFFFF << (16 * (t % 4)))) : {$urandom, $urandom};
      if (t == 3) wl = '1;
      check_all();
    end
    // reprogramming a stuck cell must not change its current
    wr_en = 1; wr_row = 0; wr_data = ~m_bits[0]; m_bits[0] = wr_data;
    @(negedge clk); wr_en = 0;
    wl = 64'h1;
    check_all();
    checks++;
    if (stuck_hits == 0) begin failures++; $display("FAIL no stuck cell ever mattered"); end
    $display("stuck cells that changed a result: %0d", stuck_hits);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
