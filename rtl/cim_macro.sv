// cim_macro: bit-sliced compute-in-memory macro with sign-flip and bit-flip
// stuck-at-fault correction.
//
// The macro computes y[c] = sum_r W[r][c] * a[r] for a 64x64 matrix of 8-bit
// two's-complement weights and 64 activations of 8 bits (unsigned, or two's
// complement when act_signed is set). Weight bit k of every weight lives in
// crossbar array k. A VMM runs in 256 conversion steps: for each of 8 column
// phases, each activation bit (bit-streaming, LSB first) and each 16-row group
// (partial word-line activation), every array drives the selected bit-column
// of each 8-column group into its own 4-bit flash ADC. Lane a (one per ADC
// position) gathers the 8 arrays' codes of one weight column and accumulates
// them in shift-and-add.
//
// Stuck-at faults in the arrays are tolerated by mapping computed offline:
// closest-value mapping picks the nearest storable code for each weight, and
// either sign-flip (store -W for a whole weight column, col_flip = 1; the
// result is negated after shift-and-add) or bit-flip (store a bit-slice of a
// column complemented, b_flip = 1; its partial sum is replaced by sum(I) -
// psum before shift-and-add, with sum(I) from one adder tree shared by all
// arrays) recovers the intended dot product. mode selects cim_pkg::MODE_CVM (no
// correction), cim_pkg::MODE_SIGN_FLIP or cim_pkg::MODE_BIT_FLIP; the two corrections are
// alternatives and are never applied together.
//
// Interface:
//   w_wr_*   program one 64-bit row of one bit-slice array (deployment).
//   flt_*    simulation-only: mark cells of one row stuck-at-0 / stuck-at-1;
//            stands in for the manufacturing defects of a real chip.
//   cf_wr_*, bf_wr_*  write the col_flip and b_flip mask registers.
//   start, act_in, mode, act_signed  start a VMM (accepted when busy is low).
//   y, done  results; done pulses when all 64 outputs are valid.
// Timing: the VMM starts at the clock edge that samples start; done is high
// in the cycle 259 clock edges later (256 steps + ADC latch + accumulate +
// output write). The step order and rate, the mode input and the write ports
// are this design's choices; array organisation, PWA, ADC sharing and the two
// correction datapaths follow the paper.
module cim_macro
#(
  parameter int unsigned W_BITS    = cim_pkg::W_BITS,
  parameter int unsigned A_BITS    = cim_pkg::A_BITS,
  parameter int unsigned ROWS      = cim_pkg::ROWS,
  parameter int unsigned COLS      = cim_pkg::COLS,
  parameter int unsigned PWA_ROWS  = cim_pkg::PWA_ROWS,
  parameter int unsigned COL_SHARE = cim_pkg::COL_SHARE,
  parameter int unsigned ADC_BITS  = cim_pkg::ADC_BITS,
  parameter int unsigned ACC_W     = cim_pkg::ACC_W,
  localparam int unsigned RW   = $clog2(ROWS),
  localparam int unsigned KW   = $clog2(W_BITS),
  localparam int unsigned LW   = $clog2(A_BITS),
  localparam int unsigned NADC = COLS / COL_SHARE,
  localparam int unsigned NGRP = ROWS / PWA_ROWS,
  localparam int unsigned GW   = (NGRP > 1) ? $clog2(NGRP) : 1,
  localparam int unsigned PHW  = (COL_SHARE > 1) ? $clog2(COL_SHARE) : 1,
  localparam int unsigned IW   = $clog2(ROWS + 1),
  localparam int unsigned SUM_W = $clog2(PWA_ROWS + 1)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // weight programming
  input  logic                    w_wr_en,
  input  logic [KW-1:0]           w_wr_array,
  input  logic [RW-1:0]           w_wr_row,
  input  logic [COLS-1:0]         w_wr_data,
  // fault injection (simulation only)
  input  logic                    flt_wr_en,
  input  logic [KW-1:0]           flt_array,
  input  logic [RW-1:0]           flt_row,
  input  logic [COLS-1:0]         flt_sa0,
  input  logic [COLS-1:0]         flt_sa1,
  // flip masks
  input  logic                    cf_wr_en,
  input  logic [COLS-1:0]         cf_wr_data,
  input  logic                    bf_wr_en,
  input  logic [KW-1:0]           bf_wr_slice,
  input  logic [COLS-1:0]         bf_wr_data,
  // VMM
  input  cim_pkg::flip_mode_e              mode,
  input  logic                    act_signed,
  input  logic                    start,
  input  logic [A_BITS-1:0]       act_in [ROWS],
  output logic                    busy,
  output logic                    done,
  output logic signed [ACC_W-1:0] y [COLS]
);

  // ---------------------------------------------------------------- control
  cim_pkg::flip_mode_e     mode_q;
  logic           act_signed_q, load;
  logic [PHW-1:0] phase, s1_phase, s2_phase;
  logic [LW-1:0]  bit_idx, s1_bit_idx;
  logic [GW-1:0]  grp;
  logic           s1_valid, s1_first, s1_last;

  cim_controller #(.A_BITS(A_BITS), .ROWS(ROWS), .PWA_ROWS(PWA_ROWS), .COL_SHARE(COL_SHARE)) u_ctrl (
    .clk, .rst_n, .start,
    .mode_in       (mode),
    .act_signed_in (act_signed),
    .vmm_done      (done),
    .busy, .load,
    .mode          (mode_q),
    .act_signed    (act_signed_q),
    .phase, .bit_idx, .grp,
    .s1_valid, .s1_first, .s1_last, .s1_bit_idx, .s1_phase,
    .s2_phase
  );

  // ------------------------------------------------------- input streaming
  logic [ROWS-1:0]     wl;
  logic [PWA_ROWS-1:0] grp_bits;
  logic [SUM_W-1:0]    sum_i;

  bitstream_driver #(.A_BITS(A_BITS), .ROWS(ROWS), .PWA_ROWS(PWA_ROWS)) u_drv (
    .clk, .rst_n, .load, .act_in, .bit_idx, .grp, .wl, .grp_bits
  );

  input_sum_tree #(.N(PWA_ROWS)) u_sum (
    .clk, .rst_n, .in_bits (grp_bits), .sum_i
  );

  // ------------------------------------------------ bit-slice arrays + ADCs
  logic [IW-1:0]       col_current [W_BITS][NADC];
  logic [ADC_BITS-1:0] adc_code    [W_BITS][NADC];

  for (genvar k = 0; k < W_BITS; k++) begin : g_array
    cim_subarray #(.ROWS(ROWS), .COLS(COLS), .COL_SHARE(COL_SHARE)) u_xbar (
      .clk,
      .wr_en     (w_wr_en && (int'(w_wr_array) == k)),
      .wr_row    (w_wr_row),
      .wr_data   (w_wr_data),
      .flt_wr_en (flt_wr_en && (int'(flt_array) == k)),
      .flt_row   (flt_row),
      .flt_sa0   (flt_sa0),
      .flt_sa1   (flt_sa1),
      .wl        (wl),
      .col_sel   (phase),
      .col_current (col_current[k])
    );
    for (genvar a = 0; a < NADC; a++) begin : g_adc
      flash_adc #(.ADC_BITS(ADC_BITS), .IN_W(IW)) u_adc (
        .clk, .i_col (col_current[k][a]), .code (adc_code[k][a])
      );
    end
  end

  // ------------------------------------------------------------ flip masks
  logic [COLS-1:0] col_flip;
  logic [COLS-1:0] b_flip [W_BITS];

  flip_mask_regs #(.W_BITS(W_BITS), .COLS(COLS)) u_masks (
    .clk, .rst_n, .cf_wr_en, .cf_wr_data, .bf_wr_en, .bf_wr_slice, .bf_wr_data,
    .col_flip, .b_flip
  );

  // ------------------------------------------------------ column lanes
  logic                    res_valid [NADC];
  logic signed [ACC_W-1:0] res       [NADC];

  for (genvar a = 0; a < NADC; a++) begin : g_lane
    logic [ADC_BITS-1:0] lane_codes [W_BITS];
    logic [W_BITS-1:0]   lane_bflip;
    always_comb begin
      for (int k = 0; k < W_BITS; k++) begin
        lane_codes[k] = adc_code[k][a];
        lane_bflip[k] = b_flip[k][a * COL_SHARE + int'(s1_phase)];
      end
    end
    column_peripheral #(.W_BITS(W_BITS), .A_BITS(A_BITS), .ADC_BITS(ADC_BITS),
                        .SUM_W(SUM_W), .ACC_W(ACC_W)) u_lane (
      .clk, .rst_n,
      .mode         (mode_q),
      .act_signed   (act_signed_q),
      .valid        (s1_valid),
      .first        (s1_first),
      .last         (s1_last),
      .bit_idx      (s1_bit_idx),
      .adc_code     (lane_codes),
      .sum_i        (sum_i),
      .b_flip_col   (lane_bflip),
      .col_flip_col (col_flip[a * COL_SHARE + int'(s1_phase)]),
      .res_valid    (res_valid[a]),
      .res          (res[a])
    );
  end

  // ------------------------------------------------------------- outputs
  output_buffer #(.COLS(COLS), .COL_SHARE(COL_SHARE), .ACC_W(ACC_W)) u_out (
    .clk, .rst_n,
    .wr_en    (res_valid[0]),
    .wr_phase (s2_phase),
    .wr_data  (res),
    .y, .done
  );

endmodule
