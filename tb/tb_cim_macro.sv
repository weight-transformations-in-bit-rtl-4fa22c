// tb_cim_macro: end-to-end test of the compute-in-memory macro at its full
// size (eight 64x64 arrays, 8-bit weights and activations).
//
// A random 64x64 weight layer is deployed on arrays with random stuck-at
// faults (5% of cells, half stuck-at-0, half stuck-at-1). The testbench then:
//   1. writes the weights naively (faults corrupt them) and runs VMMs in
//      MODE_CVM, so the fault model is seen to act;
//   2. maps the layer with closest-value mapping and runs MODE_CVM;
//   3. maps it with sign-flip (col_flip) and runs MODE_SIGN_FLIP;
//   4. maps it with bit-flip (b_flip) and runs MODE_BIT_FLIP.
// Each run uses unsigned, signed and all-ones activation vectors. Every output
// is compared with a bit-level model of the macro written here (cell values
// with faults, 16-row partial sums, 4-bit ADC saturation, bit-flip
// correction, two's-complement shift-and-add, sign-flip negation) and, for
// columns where no ADC saturated, with the plain integer dot product of the
// activations and the effective (mapped) weights. The VMM latency must be 259
// clocks. The mapping errors must satisfy sign-flip <= CVM and bit-flip <= CVM.
// Each mechanism (negation, bit-flip correction, fault corruption, ADC
// saturation, signed and unsigned activations, a start while busy, which
// must be ignored) is counted and must occur. mode and act_signed are changed
// during each run to show they are captured at start.
module tb_cim_macro;
  import cim_map_pkg::*;

  localparam int N = 64;
  localparam int LATENCY = 259;
  localparam int FAULT_PPM = 50000;  // 5 %

  logic clk = 0;
  always #5 clk = ~clk;

  logic rst_n;
  logic w_wr_en, flt_wr_en, cf_wr_en, bf_wr_en, act_signed, start, busy, done;
  logic [2:0] w_wr_array, flt_array, bf_wr_slice;
  logic [5:0] w_wr_row, flt_row;
  logic [63:0] w_wr_data, flt_sa0, flt_sa1, cf_wr_data, bf_wr_data;
  cim_pkg::flip_mode_e mode;
  logic [7:0] act_in [N];
  logic signed [23:0] y [N];

  cim_macro dut (.*);

  int checks = 0, failures = 0;
  // loop bounds held in variables (set at time 0) so the simulator build
  // does not unroll the reference-model loops
  int nd, ns, ng, nj;
  int n_neg = 0, n_bflip = 0, n_corrupt = 0, n_sat = 0, n_signed = 0, n_unsigned = 0, n_exact = 0, n_start_ignored = 0;

  // layer and chip state
  int          wt      [N][N];   // target weights [row][col]
  logic [63:0] fsa0    [8][N];   // fault maps [array][row], bit = column
  logic [63:0] fsa1    [8][N];
  logic [7:0]  stored  [N][N];   // code written to [row][col]
  logic [63:0] colflip;
  logic [7:0]  bflip   [N];      // per column, bit k = slice k flipped
  int          weff    [N][N];   // effective weight the hardware should realise

  task automatic chk(input bit cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", msg);
    end
  endtask

  function automatic logic [7:0] wsa0(int r, int c);
    logic [7:0] m;
    for (int k = 0; k < ns; k++) m[k] = fsa0[k][r][c];
    return m;
  endfunction

  function automatic logic [7:0] wsa1(int r, int c);
    logic [7:0] m;
    for (int k = 0; k < ns; k++) m[k] = fsa1[k][r][c];
    return m;
  endfunction

  // ------------------------------------------------------------ mappings
  task automatic map_naive();
    for (int r = 0; r < nd; r++)
      for (int c = 0; c < nd; c++) begin
        stored[r][c] = 8'(wt[r][c]);
        weff[r][c] = sval((stored[r][c] | wsa1(r, c)) & ~wsa0(r, c));
      end
    colflip = '0;
    for (int c = 0; c < nd; c++) bflip[c] = '0;
  endtask

  task automatic map_cvm();
    for (int r = 0; r < nd; r++)
      for (int c = 0; c < nd; c++) begin
        stored[r][c] = closest(wt[r][c], wsa0(r, c), wsa1(r, c), 8'h00);
        weff[r][c] = sval(stored[r][c]);
      end
    colflip = '0;
    for (int c = 0; c < nd; c++) bflip[c] = '0;
  endtask

  task automatic map_sign_flip();
    for (int c = 0; c < nd; c++) begin
      logic [7:0] wp [N], wm [N];
      int ep, em;
      ep = 0; em = 0;
      for (int r = 0; r < nd; r++) begin
        wp[r] = closest(wt[r][c], wsa0(r, c), wsa1(r, c), 8'h00);
        wm[r] = closest(-wt[r][c], wsa0(r, c), wsa1(r, c), 8'h00);
        ep += iabs(sval(wp[r]) - wt[r][c]);
        em += iabs(sval(wm[r]) + wt[r][c]);
      end
      colflip[c] = (em < ep);
      for (int r = 0; r < nd; r++) begin
        stored[r][c] = colflip[c] ? wm[r] : wp[r];
        weff[r][c] = colflip[c] ? -sval(wm[r]) : sval(wp[r]);
      end
      bflip[c] = '0;
    end
  endtask

  task automatic map_bit_flip();
    for (int c = 0; c < nd; c++) begin
      int best_e, best_j;
      best_e = 1 << 30; best_j = 0;
      for (int j = 0; j < nj; j++) begin
        int e;
        e = 0;
        for (int r = 0; r < nd && e < best_e; r++) begin
          if ((wsa0(r, c) | wsa1(r, c)) != 8'h00)
            e += iabs(sval(closest(wt[r][c], wsa0(r, c), wsa1(r, c), 8'(j)) ^ 8'(j)) - wt[r][c]);
        end
        if (e < best_e) begin best_e = e; best_j = j; end
      end
      bflip[c] = 8'(best_j);
      for (int r = 0; r < nd; r++) begin
        if ((wsa0(r, c) | wsa1(r, c)) != 8'h00) stored[r][c] = closest(wt[r][c], wsa0(r, c), wsa1(r, c), bflip[c]);
        else                                   stored[r][c] = 8'(wt[r][c]) ^ bflip[c];
        weff[r][c] = sval(stored[r][c] ^ bflip[c]);
      end
    end
    colflip = '0;
  endtask

  function automatic int map_error();
    int e;
    e = 0;
    for (int r = 0; r < nd; r++)
      for (int c = 0; c < nd; c++) e += iabs(weff[r][c] - wt[r][c]);
    return e;
  endfunction

  // ------------------------------------------------- deployment on the chip
  task automatic deploy();
    for (int k = 0; k < ns; k++)
      for (int r = 0; r < nd; r++) begin
        w_wr_en = 1; w_wr_array = 3'(k); w_wr_row = 6'(r);
        for (int c = 0; c < nd; c++) w_wr_data[c] = stored[r][c][k];
        @(negedge clk);
      end
    w_wr_en = 0;
    cf_wr_en = 1; cf_wr_data = colflip;
    for (int k = 0; k < ns; k++) begin
      bf_wr_en = 1; bf_wr_slice = 3'(k);
      for (int c = 0; c < nd; c++) bf_wr_data[c] = bflip[c][k];
      @(negedge clk);
      cf_wr_en = 0;
    end
    bf_wr_en = 0;
  endtask

  // ------------------------------------------- bit-level model of one column
  function automatic longint model_col(int c, cim_pkg::flip_mode_e m, bit sgn, output bit saturated);
    longint acc;
    acc = 0;
    saturated = 0;
    for (int l = 0; l < ns; l++)
      for (int g = 0; g < ng; g++) begin
        int si;
        longint v;
        si = 0;
        for (int r = g * 16; r < g * 16 + 16; r++) si += int'(act_in[r][l]);
        v = 0;
        for (int k = 0; k < ns; k++) begin
          int cnt, code, p;
          cnt = 0;
          for (int r = g * 16; r < g * 16 + 16; r++) begin
            bit cellv;
            cellv = (stored[r][c][k] | fsa1[k][r][c]) & ~fsa0[k][r][c];
            if (act_in[r][l] && cellv) cnt++;
          end
          code = (cnt > 15) ? 15 : cnt;
          if (cnt > 15) saturated = 1;
          p = (m == cim_pkg::MODE_BIT_FLIP && bflip[c][k]) ? si - code : code;
          if (k == 7) v -= longint'(p) * 128;
          else        v += longint'(p) <<< k;
        end
        if (sgn && l == 7) acc -= v * 128;
        else               acc += v <<< l;
      end
    if (m == cim_pkg::MODE_SIGN_FLIP && colflip[c]) acc = -acc;
    return acc;
  endfunction

  // ------------------------------------------------------------ one VMM
  task automatic run_vmm(input cim_pkg::flip_mode_e m, input bit sgn, input int kind, input string tag);
    int cycles;
    for (int r = 0; r < nd; r++) begin
      if (kind == 2)      act_in[r] = 8'hFF;
      else if (sgn)       act_in[r] = 8'($urandom);
      else                act_in[r] = 8'($urandom_range(0, 255));
    end
    mode = m; act_signed = sgn;
    start = 1;
    @(negedge clk);
    start = 0;
    // scramble the inputs: the macro must have captured them at start
    for (int r = 0; r < nd; r++) act_in[r] = ~act_in[r];
    chk(busy, {tag, ": busy after start"});
    cycles = 1;
    // mode and act_signed are captured at start; a start while busy is ignored
    mode = cim_pkg::flip_mode_e'((int'(m) + 1) % 3); act_signed = !sgn;
    while (!done && cycles < 2000) begin
      start = (cycles == 100);
      if (start) n_start_ignored++;
      @(negedge clk);
      cycles++;
    end
    start = 0;
    for (int r = 0; r < nd; r++) act_in[r] = ~act_in[r];
    chk(cycles == LATENCY, $sformatf("%s: latency %0d, expected %0d", tag, cycles, LATENCY));
    if (sgn) n_signed++; else n_unsigned++;
    for (int c = 0; c < nd; c++) begin
      longint expv, dot;
      bit sat;
      expv = model_col(c, m, sgn, sat);
      chk(longint'(y[c]) == expv, $sformatf("%s: y[%0d]=%0d model=%0d", tag, c, y[c], expv));
      if (sat) n_sat++;
      else begin
        dot = 0;
        for (int r = 0; r < nd; r++)
          dot += longint'(weff[r][c]) * (sgn ? longint'($signed(act_in[r])) : longint'(act_in[r]));
        chk(longint'(y[c]) == dot, $sformatf("%s: y[%0d]=%0d dot=%0d", tag, c, y[c], dot));
        n_exact++;
      end
    end
    @(negedge clk);
    chk(!busy, {tag, ": idle after done"});
  endtask

  initial begin
    #20ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e_cvm = 0, e_sf = 0, e_bf = 0, e_naive = 0;
    nd = N; ns = 8; ng = 4; nj = 256;
    rst_n = 0;
    w_wr_en = 0; flt_wr_en = 0; cf_wr_en = 0; bf_wr_en = 0; start = 0; act_signed = 0;
    w_wr_array = 0; flt_array = 0; bf_wr_slice = 0; w_wr_row = 0; flt_row = 0;
    w_wr_data = 0; flt_sa0 = 0; flt_sa1 = 0; cf_wr_data = 0; bf_wr_data = 0;
    mode = cim_pkg::MODE_CVM;
    for (int r = 0; r < nd; r++) act_in[r] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // layer: bell-shaped random weights; column 1 all -1 (every bit set) so
    // that all-ones activations drive 16 conducting cells into an ADC
    for (int r = 0; r < nd; r++)
      for (int c = 0; c < nd; c++) begin
        int s;
        s = 0;
        for (int i = 0; i < 4; i++) s += $urandom_range(0, 64);
        wt[r][c] = (c == 1) ? -1 : s - 128;
      end

    // manufacturing defects
    for (int k = 0; k < ns; k++)
      for (int r = 0; r < nd; r++) begin
        for (int c = 0; c < nd; c++) begin
          bit f, pol;
          f = ($urandom_range(0, 999999) < FAULT_PPM);
          pol = 1'($urandom);
          fsa0[k][r][c] = f & ~pol;
          fsa1[k][r][c] = f & pol;
        end
        flt_wr_en = 1; flt_array = 3'(k); flt_row = 6'(r);
        flt_sa0 = fsa0[k][r]; flt_sa1 = fsa1[k][r];
        @(negedge clk);
      end
    flt_wr_en = 0;

    // one call site per task keeps the simulator build small
    for (int step = 0; step < 4; step++) begin
      cim_pkg::flip_mode_e m;
      string tag;
      case (step)
        0: begin map_naive(); e_naive = map_error(); m = cim_pkg::MODE_CVM; tag = "naive";
             for (int r = 0; r < nd; r++)
               for (int c = 0; c < nd; c++) if (weff[r][c] != wt[r][c]) n_corrupt++;
           end
        1: begin map_cvm(); e_cvm = map_error(); m = cim_pkg::MODE_CVM; tag = "cvm"; end
        2: begin map_sign_flip(); e_sf = map_error(); m = cim_pkg::MODE_SIGN_FLIP; tag = "sign-flip";
             for (int c = 0; c < nd; c++) if (colflip[c]) n_neg++;
           end
        default: begin map_bit_flip(); e_bf = map_error(); m = cim_pkg::MODE_BIT_FLIP; tag = "bit-flip";
             for (int c = 0; c < nd; c++) for (int k = 0; k < ns; k++) if (bflip[c][k]) n_bflip++;
           end
      endcase
      deploy();
      // unsigned, signed and all-ones (signed -1) activation vectors
      for (int kind = 0; kind < 3; kind++)
        run_vmm(m, kind != 0, kind, $sformatf("%s kind %0d", tag, kind));
    end

    $display("summed |weight error|: naive %0d  cvm %0d  sign-flip %0d  bit-flip %0d", e_naive, e_cvm, e_sf, e_bf);
    chk(e_cvm <= e_naive, "CVM no worse than naive");
    chk(e_sf <= e_cvm, "sign-flip no worse than CVM");
    chk(e_bf <= e_cvm, "bit-flip no worse than CVM");
    $display("mechanisms: corrupted weights %0d, negated columns %0d, flipped bit-columns %0d, saturated column results %0d, exact-dot checks %0d, signed VMMs %0d, unsigned VMMs %0d, starts while busy %0d",
             n_corrupt, n_neg, n_bflip, n_sat, n_exact, n_signed, n_unsigned, n_start_ignored);
    chk(n_corrupt > 0, "fault corruption seen");
    chk(n_neg > 0, "sign-flip negation used");
    chk(n_bflip > 0, "bit-flip correction used");
    chk(n_sat > 0, "ADC saturation seen");
    chk(n_signed > 0 && n_unsigned > 0, "signed and unsigned activations");
    chk(n_start_ignored > 0, "start while busy tried");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
