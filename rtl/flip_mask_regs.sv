// flip_mask_regs: near-memory registers holding the sign-flip and bit-flip masks.
//
// col_flip has one bit per weight column: 1 means the column was stored as -W
// and its dot product must be negated. b_flip has one bit per bit-column, i.e.
// per column of each of the W_BITS bit-slice arrays: 1 means that slice was
// stored complemented. Both are written once at weight deployment, computed
// offline from the chip's fault map. col_flip is written as one COLS-bit word;
// b_flip one array (slice) at a time. This write interface is this design's
// choice. Reset clears both masks (no flips).
//
// Timing: writes take effect at the clock edge.
module flip_mask_regs #(
  parameter int unsigned W_BITS = cim_pkg::W_BITS,
  parameter int unsigned COLS   = cim_pkg::COLS,
  localparam int unsigned KW = $clog2(W_BITS)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cf_wr_en,
  input  logic [COLS-1:0]   cf_wr_data,
  input  logic              bf_wr_en,
  input  logic [KW-1:0]     bf_wr_slice,
  input  logic [COLS-1:0]   bf_wr_data,
  output logic [COLS-1:0]   col_flip,
  output logic [COLS-1:0]   b_flip [W_BITS]
);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      col_flip <= '0;
      for (int k = 0; k < W_BITS; k++) b_flip[k] <= '0;
    end else begin
      if (cf_wr_en) col_flip <= cf_wr_data;
      if (bf_wr_en) b_flip[bf_wr_slice] <= bf_wr_data;
    end
  end

endmodule
