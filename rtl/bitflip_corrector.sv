// bitflip_corrector: per bit-column post-processing for bit-flip.
//
// A bit-slice stored complemented produces sum(I*(1-W)) = sum(I) - sum(I*W),
// so its true partial dot product is sum(I) minus the ADC output. This unit is
// the subtractor and the 2:1 multiplexer the paper places between each ADC
// output and the shift-and-add: mux input 1 is sum(I) - adc_code, input 0 the
// ADC code itself, selected by the column's b_flip bit (forced to 0 outside
// bit-flip mode by the caller). Purely combinational.
module bitflip_corrector #(
  parameter int unsigned ADC_BITS = cim_pkg::ADC_BITS,
  parameter int unsigned SUM_W    = $clog2(cim_pkg::PWA_ROWS + 1)
) (
  input  logic [ADC_BITS-1:0] adc_code,
  input  logic [SUM_W-1:0]    sum_i,
  input  logic                flip,
  output logic [SUM_W-1:0]    psum
);

  localparam int unsigned PW = (SUM_W > ADC_BITS) ? SUM_W : ADC_BITS;

  logic [SUM_W-1:0] diff;

  // sum(I) is never below the ADC code, since the code counts a subset of the
  // active inputs and saturates; the subtraction is taken modulo 2^SUM_W.
  assign diff = SUM_W'(PW'(sum_i) - PW'(adc_code));
  assign psum = flip ? diff : SUM_W'(adc_code);

endmodule
