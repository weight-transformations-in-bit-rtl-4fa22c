// output_buffer: register file holding the VMM outputs.
//
// Each lane a finishes column a*COL_SHARE + p at the end of phase p; all lanes
// finish together, so one write stores NADC results. The write of the last
// phase raises done for one cycle. Outputs stay until overwritten by the next
// VMM. Storing the results in a register file is this design's choice.
//
// Timing: writes take effect at the clock edge; done is registered.
module output_buffer #(
  parameter int unsigned COLS      = cim_pkg::COLS,
  parameter int unsigned COL_SHARE = cim_pkg::COL_SHARE,
  parameter int unsigned ACC_W     = cim_pkg::ACC_W,
  localparam int unsigned NADC = COLS / COL_SHARE,
  localparam int unsigned PHW = (COL_SHARE > 1) ? $clog2(COL_SHARE) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    wr_en,
  input  logic [PHW-1:0]          wr_phase,
  input  logic signed [ACC_W-1:0] wr_data [NADC],
  output logic signed [ACC_W-1:0] y [COLS],
  output logic                    done
);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int c = 0; c < COLS; c++) y[c] <= '0;
      done <= 1'b0;
    end else begin
      done <= wr_en && (int'(wr_phase) == COL_SHARE - 1);
      if (wr_en)
        for (int a = 0; a < NADC; a++) y[a * COL_SHARE + int'(wr_phase)] <= wr_data[a];
    end
  end

endmodule
