// tb_workload_layer: stuck-at fault-rate sweep on three network layers, each
// run tile by tile through the macro at its full size.
//
// Workloads (layer shapes are standard network dimensions; the weights and
// activations are synthetic 8-bit values):
//   A. ResNet-18 stage-1 3x3 convolution, 64 -> 64 channels: one output pixel
//      is a 576-input (3*3*64) by 64-output VMM, 9 tiles, post-ReLU unsigned
//      activations;
//   B. ResNet-50 bottleneck 1x1 reduction, 256 -> 64 channels: 4 tiles,
//      unsigned activations;
//   C. ViT-Base feed-forward first layer, 768 inputs, one 64-wide slice of its
//      3072 outputs: 12 tiles, signed (layer-normalised) activations.
// Each tile of 64 x 64 is deployed on the macro in turn and the tile outputs
// are added as a host would. For stuck-at fault rates 0, 1, 2, 3, 4 and 5 %
// of cells (half SA0, half SA1, a fresh fault map per tile) each layer is
// mapped with CVM, sign-flip and bit-flip and run in the matching mode.
// Checks:
//   - every macro output equals the bit-level model and, without ADC
//     saturation, the integer dot product of the effective weights;
//   - VMM latency 259 clocks;
//   - at 0 % faults all three mappings reproduce the ideal layer output;
//   - at every rate the summed weight error is sign-flip <= CVM and
//     bit-flip <= CVM.
// The table printed per layer gives, per rate and mapping, the summed
// absolute weight error and the summed absolute error of the 64 layer outputs.
module tb_workload_layer;
  import cim_map_pkg::*;

  localparam int N = 64;
  localparam int LATENCY = 259;
  localparam int TILES = 12;    // most tiles of any layer below (768 input rows)
  localparam int NLAYERS = 3;
  localparam int NRATES = 6;    // stuck-at fault rates 0 % .. 5 %

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
  logic [7:0]  act_tile [N];     // activations of the tile being run
  int          wt_layer [TILES*N][N];
  logic [7:0]  act_layer [TILES*N];
  longint      out_layer [3][N]; // accumulated layer outputs per mapping
  int          nt;

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
      if (kind == 3)      act_in[r] = act_tile[r];
      else if (kind == 2) act_in[r] = 8'hFF;
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
    #200ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int rate_ppm [NRATES] = '{0, 10000, 20000, 30000, 40000, 50000};
    string lname [NLAYERS] = '{"A ResNet-18 3x3 conv 64->64", "B ResNet-50 1x1 conv 256->64", "C ViT-Base FFN 768->64 slice"};
    int ltiles [NLAYERS] = '{9, 4, 12};
    bit lsgn [NLAYERS] = '{1'b0, 1'b0, 1'b1};
    nd = N; ns = 8; ng = 4; nj = 256; nt = TILES;
    rst_n = 0;
    w_wr_en = 0; flt_wr_en = 0; cf_wr_en = 0; bf_wr_en = 0; start = 0; act_signed = 0;
    w_wr_array = 0; flt_array = 0; bf_wr_slice = 0; w_wr_row = 0; flt_row = 0;
    w_wr_data = 0; flt_sa0 = 0; flt_sa1 = 0; cf_wr_data = 0; bf_wr_data = 0;
    mode = cim_pkg::MODE_CVM;
    for (int r = 0; r < nd; r++) act_in[r] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    for (int li = 0; li < NLAYERS; li++) begin
      nt = ltiles[li];
      for (int r = 0; r < nt * nd; r++) begin
        act_layer[r] = 8'($urandom_range(0, 255));  // read as signed for layer C
        for (int c = 0; c < nd; c++) begin
          int s;
          s = 0;
          for (int i = 0; i < 4; i++) s += $urandom_range(0, 64);
          wt_layer[r][c] = s - 128;
        end
      end

      $display("%s: %0d inputs x 64 outputs, %0d tiles, %s activations",
               lname[li], nt * N, nt, lsgn[li] ? "signed" : "unsigned");
      $display("rate%%  | weight error: cvm  sign-flip  bit-flip | layer output error: cvm  sign-flip  bit-flip");
      for (int ri = 0; ri < NRATES; ri++) begin
        int werr [3];
        longint oerr [3];
        for (int i = 0; i < 3; i++) begin
          werr[i] = 0; oerr[i] = 0;
          for (int c = 0; c < nd; c++) out_layer[i][c] = 0;
        end
        for (int t = 0; t < nt; t++) begin
          for (int r = 0; r < nd; r++) begin
            act_tile[r] = act_layer[t * N + r];
            for (int c = 0; c < nd; c++) wt[r][c] = wt_layer[t * N + r][c];
          end
          for (int k = 0; k < ns; k++)
            for (int r = 0; r < nd; r++) begin
              for (int c = 0; c < nd; c++) begin
                bit f, pol;
                f = ($urandom_range(0, 999999) < rate_ppm[ri]);
                pol = 1'($urandom);
                fsa0[k][r][c] = f & ~pol;
                fsa1[k][r][c] = f & pol;
              end
              flt_wr_en = 1; flt_array = 3'(k); flt_row = 6'(r);
              flt_sa0 = fsa0[k][r]; flt_sa1 = fsa1[k][r];
              @(negedge clk);
            end
          flt_wr_en = 0;
          for (int step = 0; step < 3; step++) begin
            cim_pkg::flip_mode_e m;
            case (step)
              0: begin map_cvm(); m = cim_pkg::MODE_CVM; end
              1: begin map_sign_flip(); m = cim_pkg::MODE_SIGN_FLIP;
                   for (int c = 0; c < nd; c++) if (colflip[c]) n_neg++;
                 end
              default: begin map_bit_flip(); m = cim_pkg::MODE_BIT_FLIP;
                   for (int c = 0; c < nd; c++) for (int k = 0; k < ns; k++) if (bflip[c][k]) n_bflip++;
                 end
            endcase
            werr[step] += map_error();
            deploy();
            run_vmm(m, lsgn[li], 3, $sformatf("%s rate %0d ppm tile %0d mapping %0d", lname[li], rate_ppm[ri], t, step));
            for (int c = 0; c < nd; c++) out_layer[step][c] += longint'(y[c]);
          end
        end
        for (int c = 0; c < nd; c++) begin
          longint ideal;
          ideal = 0;
          for (int r = 0; r < nt * nd; r++) ideal += longint'(wt_layer[r][c]) * (lsgn[li] ? longint'($signed(act_layer[r])) : longint'(act_layer[r]));
          for (int i = 0; i < 3; i++)
            oerr[i] += (out_layer[i][c] > ideal) ? out_layer[i][c] - ideal : ideal - out_layer[i][c];
        end
        $display("%0d.%0d   | %0d  %0d  %0d | %0d  %0d  %0d", rate_ppm[ri] / 10000, (rate_ppm[ri] / 1000) % 10,
                 werr[0], werr[1], werr[2], oerr[0], oerr[1], oerr[2]);
        if (rate_ppm[ri] == 0) begin
          chk(werr[0] == 0 && werr[1] == 0 && werr[2] == 0, "no weight error without faults");
          chk(oerr[0] == 0 && oerr[1] == 0 && oerr[2] == 0, "ideal layer output without faults");
        end
        chk(werr[1] <= werr[0], $sformatf("%s sign-flip no worse than CVM at %0d ppm", lname[li], rate_ppm[ri]));
        chk(werr[2] <= werr[0], $sformatf("%s bit-flip no worse than CVM at %0d ppm", lname[li], rate_ppm[ri]));
      end
    end
    $display("negated columns %0d, flipped bit-columns %0d, saturated column results %0d, exact-dot checks %0d",
             n_neg, n_bflip, n_sat, n_exact);
    chk(n_neg > 0 && n_bflip > 0, "both corrections used");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
