// input_sum_tree: adder tree that counts the input bits applied to the active
// rows, sum(I), for the bit-flip correction.
//
// Bit-flip stores a bit-slice complemented; its true partial sum is recovered
// as sum(I) - psum, so every bit-column needs the number of active inputs of
// the current step. One tree serves all columns of all arrays, since the
// arrays share the activation vector. The tree adds pairs level by level
// (log2(N) levels); its result is registered so it lines up with the clocked
// flash ADC outputs. The register stage is this design's choice.
//
// Timing: sum_i holds the count of in_bits from the previous clock.
module input_sum_tree #(
  parameter int unsigned N = cim_pkg::PWA_ROWS,
  localparam int unsigned SW = $clog2(N + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [N-1:0]  in_bits,
  output logic [SW-1:0] sum_i
);

  localparam int unsigned LEVELS = $clog2(N);
  localparam int unsigned NP = 1 << LEVELS;  // leaves padded to a power of two

  // node[l][i]: sum of the i-th group of 2^l leaves.
  logic [SW-1:0] node [LEVELS+1][NP];

  always_comb begin
    for (int l = 0; l <= LEVELS; l++)
      for (int i = 0; i < NP; i++) node[l][i] = '0;
    for (int i = 0; i < NP; i++) node[0][i] = (i < N) ? SW'(in_bits[i]) : '0;
    for (int l = 1; l <= LEVELS; l++)
      for (int i = 0; i < (NP >> l); i++)
        node[l][i] = node[l-1][2*i] + node[l-1][2*i+1];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) sum_i <= '0;
    else        sum_i <= node[LEVELS][0];
  end

endmodule
