// signflip_unit: two's-complement negation and 2:1 multiplexer for sign-flip.
//
// A weight column stored as -W yields the negated dot product, so its
// shift-and-add result is multiplied by -1 after accumulation. As the paper
// suggests, the negation is built as a one's complement (inverters) followed by
// a ripple-carry increment; the multiplexer passes the negated value (input 1)
// when the column's col_flip bit is set and the original (input 0) otherwise.
// Purely combinational. The most negative value has no positive counterpart;
// the accumulator is wide enough that a dot product never reaches it.
module signflip_unit #(
  parameter int unsigned W = cim_pkg::ACC_W
) (
  input  logic signed [W-1:0] x,
  input  logic                flip,
  output logic signed [W-1:0] y
);

  logic [W-1:0] ones;
  logic [W-1:0] neg;
  logic [W:0]   carry;

  assign ones = ~x;

  // Ripple-carry adder adding 1: a chain of half adders.
  assign carry[0] = 1'b1;
  for (genvar i = 0; i < W; i++) begin : g_ripple
    assign neg[i]     = ones[i] ^ carry[i];
    assign carry[i+1] = ones[i] & carry[i];
  end

  assign y = flip ? signed'(neg) : x;

endmodule
