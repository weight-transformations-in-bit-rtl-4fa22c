// bitstream_driver: input vector register and word-line driver for binary
// bit-streaming with partial word-line activation.
//
// The 64 activations of a VMM are captured when load is high. In every
// conversion step the controller names an activation bit l (bit_idx) and a PWA
// row group g (grp); the driver puts bit l of the activations of rows
// g*PWA_ROWS .. g*PWA_ROWS+PWA_ROWS-1 on their word lines (1 = VDD) and holds
// every other row at 0. The same PWA_ROWS bits go to the sum(I) adder tree.
// Bit-streaming with 0/VDD levels follows the paper; contiguous row groups are
// this design's choice.
//
// Timing: act_in is captured at the clock edge with load; wl and grp_bits
// follow bit_idx and grp combinationally.
module bitstream_driver #(
  parameter int unsigned A_BITS   = cim_pkg::A_BITS,
  parameter int unsigned ROWS     = cim_pkg::ROWS,
  parameter int unsigned PWA_ROWS = cim_pkg::PWA_ROWS,
  localparam int unsigned LW = $clog2(A_BITS),
  localparam int unsigned NGRP = ROWS / PWA_ROWS,
  localparam int unsigned GW = (NGRP > 1) ? $clog2(NGRP) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                load,
  input  logic [A_BITS-1:0]   act_in [ROWS],
  input  logic [LW-1:0]       bit_idx,
  input  logic [GW-1:0]       grp,
  output logic [ROWS-1:0]     wl,
  output logic [PWA_ROWS-1:0] grp_bits
);

  logic [A_BITS-1:0] act_q [ROWS];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int r = 0; r < ROWS; r++) act_q[r] <= '0;
    end else if (load) begin
      for (int r = 0; r < ROWS; r++) act_q[r] <= act_in[r];
    end
  end

  always_comb begin
    wl = '0;
    for (int i = 0; i < PWA_ROWS; i++) begin
      grp_bits[i] = act_q[int'(grp) * PWA_ROWS + i][bit_idx];
      wl[int'(grp) * PWA_ROWS + i] = grp_bits[i];
    end
  end

endmodule
