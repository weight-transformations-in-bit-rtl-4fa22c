// flash_adc: behavioural model of a flash ADC that digitises one column current.
//
// This is a behavioural model of an analog block; the comparator bank is not
// synthesizable logic. 2^ADC_BITS - 1 clocked comparators compare the column
// current (in units of one conducting cell) with thresholds k + 0.5, k = 0 ..
// 2^ADC_BITS - 2, producing a thermometer code; the number of 1s in it is the
// output code. A current of 2^ADC_BITS cells or more saturates at the top code.
// With 16 rows active and a 4-bit ADC this matters only when all 16 rows
// conduct; the threshold placement and the saturation are this design's
// reading of the 4-bit flash ADC the macro uses.
//
// Timing: the code is latched at the rising clock edge, one cycle after the
// current is presented.
module flash_adc #(
  parameter int unsigned ADC_BITS = cim_pkg::ADC_BITS,
  parameter int unsigned IN_W     = 7
) (
  input  logic                clk,
  input  logic [IN_W-1:0]     i_col,
  output logic [ADC_BITS-1:0] code
);

  localparam int unsigned NCMP = (1 << ADC_BITS) - 1;

  logic [NCMP-1:0]     therm;
  logic [ADC_BITS-1:0] enc;

  // Comparator k fires when the current exceeds k + 0.5 units, i.e. i_col > k.
  always_comb begin
    for (int k = 0; k < NCMP; k++) therm[k] = (int'(i_col) > k);
  end

  // Thermometer-to-binary encoder: count the fired comparators.
  always_comb begin
    enc = '0;
    for (int k = 0; k < NCMP; k++) enc = enc + ADC_BITS'(therm[k]);
  end

  always_ff @(posedge clk) code <= enc;

endmodule
