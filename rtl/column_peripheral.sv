// column_peripheral: one shared set of post-ADC circuits (a "lane") that
// serves COL_SHARE weight columns in turn.
//
// Lane a receives, from ADC a of each of the W_BITS bit-slice arrays, the code
// of the same weight column. Per step:
//   1. bit-flip: for every slice k, a bitflip_corrector replaces the code with
//      sum(I) - code when the column's b_flip bit of slice k is set and the mode
//      is cim_pkg::MODE_BIT_FLIP (correction before shift-and-add);
//   2. shift_add accumulates the slice-weighted, bit-shifted step value;
//   3. sign-flip: when the column's last step has been accumulated, the total
//      passes through signflip_unit, negated when col_flip is set and the mode
//      is cim_pkg::MODE_SIGN_FLIP (correction after shift-and-add).
// The placement of the two corrections (before and after shift-and-add) and
// the 2:1 muxes follow the paper; building both in one lane with a run-time
// mode select is this design's choice, since the paper treats the two as
// alternatives and never combines them.
//
// Timing: step inputs (already aligned with the latched ADC codes) are sampled
// at the clock edge. One cycle after a step marked last, res_valid is high for
// one cycle with the finished column's result on res.
module column_peripheral
#(
  parameter int unsigned W_BITS   = cim_pkg::W_BITS,
  parameter int unsigned A_BITS   = cim_pkg::A_BITS,
  parameter int unsigned ADC_BITS = cim_pkg::ADC_BITS,
  parameter int unsigned SUM_W    = $clog2(cim_pkg::PWA_ROWS + 1),
  parameter int unsigned ACC_W    = cim_pkg::ACC_W,
  localparam int unsigned LW = $clog2(A_BITS)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  cim_pkg::flip_mode_e              mode,
  input  logic                    act_signed,
  input  logic                    valid,
  input  logic                    first,
  input  logic                    last,
  input  logic [LW-1:0]           bit_idx,
  input  logic [ADC_BITS-1:0]     adc_code [W_BITS],
  input  logic [SUM_W-1:0]        sum_i,
  input  logic [W_BITS-1:0]       b_flip_col,
  input  logic                    col_flip_col,
  output logic                    res_valid,
  output logic signed [ACC_W-1:0] res
);

  logic [SUM_W-1:0]        psum [W_BITS];
  logic signed [ACC_W-1:0] acc;
  logic                    neg_q;

  for (genvar k = 0; k < W_BITS; k++) begin : g_slice
    bitflip_corrector #(.ADC_BITS(ADC_BITS), .SUM_W(SUM_W)) u_bf (
      .adc_code (adc_code[k]),
      .sum_i    (sum_i),
      .flip     (b_flip_col[k] && (mode == cim_pkg::MODE_BIT_FLIP)),
      .psum     (psum[k])
    );
  end

  shift_add #(.W_BITS(W_BITS), .A_BITS(A_BITS), .P_W(SUM_W), .ACC_W(ACC_W)) u_sa (
    .clk, .rst_n, .valid, .first, .bit_idx, .act_signed,
    .psum (psum),
    .acc  (acc)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      res_valid <= 1'b0;
      neg_q     <= 1'b0;
    end else begin
      res_valid <= valid && last;
      if (valid && last) neg_q <= col_flip_col && (mode == cim_pkg::MODE_SIGN_FLIP);
    end
  end

  signflip_unit #(.W(ACC_W)) u_sf (
    .x    (acc),
    .flip (neg_q),
    .y    (res)
  );

endmodule
