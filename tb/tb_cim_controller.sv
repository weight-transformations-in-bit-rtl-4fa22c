// tb_cim_controller: after start, the controller must issue exactly 256
// steps, in the order phase (outer), activation bit, row group (inner), with
// first/last tags on the right steps, the stage-1 tags one clock later and the
// stage-2 phase one clock after that; start is ignored while busy; busy drops
// one clock after vmm_done; mode and act_signed are captured at start.
module tb_cim_controller;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, start, act_signed_in, vmm_done, busy, load, act_signed;
  cim_pkg::flip_mode_e mode_in, mode;
  logic [2:0] phase, bit_idx, s1_bit_idx, s1_phase, s2_phase;
  logic [1:0] grp;
  logic s1_valid, s1_first, s1_last;
  int checks = 0, failures = 0;

  cim_controller #(.A_BITS(8), .ROWS(64), .PWA_ROWS(16), .COL_SHARE(8)) dut (.*);

  task automatic chk(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; start = 0; act_signed_in = 0; vmm_done = 0; mode_in = cim_pkg::MODE_CVM;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int run = 0; run < 3; run++) begin
      int p_exp, l_exp, g_exp, steps, p1, l1, first1, last1, p2;
      cim_pkg::flip_mode_e m;
      m = cim_pkg::flip_mode_e'(run);
      chk(!busy, "busy before start");
      start = 1; mode_in = m; act_signed_in = 1'(run);
      #1 chk(load, "load with start when idle");
      @(negedge clk);
      start = 0; mode_in = cim_pkg::MODE_CVM; act_signed_in = 0;
      chk(busy, "busy after start");
      chk(mode == m, "mode captured");
      chk(act_signed == 1'(run), "act_signed captured");
      steps = 0; p1 = -1; p2 = -1;
      // stage-0 steps
      for (int p = 0; p < 8; p++)
        for (int l = 0; l < 8; l++)
          for (int g = 0; g < 4; g++) begin
            if (steps == 10) begin start = 1; #1 chk(!load, "no load while busy"); end
            chk(int'(phase) == p && int'(bit_idx) == l && int'(grp) == g,
                $sformatf("step order p=%0d l=%0d g=%0d got %0d %0d %0d", p, l, g, phase, bit_idx, grp));
            if (steps > 0) begin
              chk(s1_valid && int'(s1_phase) == p1 && int'(s1_bit_idx) == l1 &&
                  s1_first == 1'(first1) && s1_last == 1'(last1), "stage-1 tags");
            end
            if (steps > 1) chk(int'(s2_phase) == p2, "stage-2 phase");
            p2 = p1;
            p1 = p; l1 = l; first1 = (l == 0 && g == 0); last1 = (l == 7 && g == 3);
            steps++;
            @(negedge clk);
            start = 0;
          end
      chk(s1_valid && s1_last && int'(s1_phase) == 7, "final stage-1 step");
      @(negedge clk);
      chk(!s1_valid, "no steps after 256");
      chk(int'(s2_phase) == 7, "final stage-2 phase");
      chk(busy, "busy until vmm_done");
      repeat (3) @(negedge clk);
      chk(busy && !s1_valid, "draining");
      vmm_done = 1;
      @(negedge clk);
      vmm_done = 0;
      chk(!busy, "idle after vmm_done");
      chk(steps == 256, "256 steps");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
