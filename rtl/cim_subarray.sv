// cim_subarray: behavioural model of one binary-bitcell crossbar sub-array with
// stuck-at faults and its analog column multiplexer.
//
// This is a behavioural model of an analog block (8T-SRAM, 1T-1ReRAM or 1FeFET
// cells summing currents on a shared line); it is not meant for synthesis.
// Each bitcell stores one weight bit. When a word line is at VDD (input bit 1),
// every bitcell on that row holding a 1 adds one unit of current to its column;
// the column current is modelled as that integer count, without noise or
// non-linearity. Cells may be stuck at 0 or at 1: a stuck bitcell conducts
// according to its stuck value whatever was programmed, as the paper's fault
// model describes. The fault masks are written through a simulation-only port
// standing in for manufacturing defects, and start cleared.
//
// Only the columns routed to the ADCs are reported: ADC a sees column
// a*COL_SHARE + col_sel (this grouping is this design's choice).
//
// Interface and timing: programming (wr_*) and fault marking (flt_*) take
// effect at the clock edge; col_current follows wl and col_sel
// combinationally. The controller drives only the rows of the active PWA group.
module cim_subarray #(
  parameter int unsigned ROWS      = cim_pkg::ROWS,
  parameter int unsigned COLS      = cim_pkg::COLS,
  parameter int unsigned COL_SHARE = cim_pkg::COL_SHARE,
  localparam int unsigned RW = $clog2(ROWS),
  localparam int unsigned SW = (COL_SHARE > 1) ? $clog2(COL_SHARE) : 1,
  localparam int unsigned NADC = COLS / COL_SHARE,
  localparam int unsigned IW = $clog2(ROWS + 1)
) (
  input  logic                 clk,
  input  logic                 wr_en,
  input  logic [RW-1:0]        wr_row,
  input  logic [COLS-1:0]      wr_data,
  input  logic                 flt_wr_en,
  input  logic [RW-1:0]        flt_row,
  input  logic [COLS-1:0]      flt_sa0,
  input  logic [COLS-1:0]      flt_sa1,
  input  logic [ROWS-1:0]      wl,
  input  logic [SW-1:0]        col_sel,
  output logic [IW-1:0]        col_current [NADC]
);

  logic [COLS-1:0] bitcell [ROWS];
  logic [COLS-1:0] sa0  [ROWS];
  logic [COLS-1:0] sa1  [ROWS];

  initial begin
    for (int r = 0; r < ROWS; r++) begin
      sa0[r] = '0;
      sa1[r] = '0;
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en) bitcell[wr_row] <= wr_data;
    if (flt_wr_en) begin
      sa0[flt_row] <= flt_sa0;
      sa1[flt_row] <= flt_sa1 & ~flt_sa0;  // a bitcell is stuck one way only
    end
  end

  // Conducting state of every bitcell: programmed bit overridden by its fault.
  always_comb begin
    for (int a = 0; a < NADC; a++) begin
      automatic int unsigned c = a * COL_SHARE + int'(col_sel);
      automatic logic [IW-1:0] n = '0;
      for (int r = 0; r < ROWS; r++) begin
        if (wl[r] && ((bitcell[r][c] | sa1[r][c]) & ~sa0[r][c])) n = n + 1'b1;
      end
      col_current[a] = n;
    end
  end

endmodule
