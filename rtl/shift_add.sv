// shift_add: shift-and-add accumulator of one weight column for two's-complement
// bit-sliced weights and bit-streamed activations.
//
// Each valid step brings the W_BITS partial sums p[k] of one weight column,
// one per bit-slice array, for activation bit l and one PWA row group. The
// step value is
//     v = sum_{k<W_BITS-1} 2^k p[k]  -  2^(W_BITS-1) p[W_BITS-1]
// (the weight MSB has negative weight) and the accumulator adds 2^l v, or
// subtracts it when l is the activation MSB and act_signed is set. This is the
// paper's signed reconstruction formula with the row groups summed as well.
// Unsigned activations (act_signed = 0) simply add every bit.
//
// Timing: step inputs are sampled at the clock edge; acc holds the sum of all
// steps since the last one marked first (which discards the older total).
module shift_add #(
  parameter int unsigned W_BITS = cim_pkg::W_BITS,
  parameter int unsigned A_BITS = cim_pkg::A_BITS,
  parameter int unsigned P_W    = $clog2(cim_pkg::PWA_ROWS + 1),
  parameter int unsigned ACC_W  = cim_pkg::ACC_W,
  localparam int unsigned LW = $clog2(A_BITS)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    valid,
  input  logic                    first,
  input  logic [LW-1:0]           bit_idx,
  input  logic                    act_signed,
  input  logic [P_W-1:0]          psum [W_BITS],
  output logic signed [ACC_W-1:0] acc
);

  logic signed [ACC_W-1:0] slice_sum, term, base;

  always_comb begin
    slice_sum = '0;
    for (int k = 0; k < W_BITS; k++) begin
      if (k == W_BITS - 1) slice_sum = slice_sum - (ACC_W'(psum[k]) << k);
      else                 slice_sum = slice_sum + (ACC_W'(psum[k]) << k);
    end
    term = slice_sum <<< bit_idx;
    base = first ? '0 : acc;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) acc <= '0;
    else if (valid) begin
      if (act_signed && (int'(bit_idx) == A_BITS - 1)) acc <= base - term;
      else                                              acc <= base + term;
    end
  end

endmodule
