// cim_controller: sequencer of one vector-matrix multiplication.
//
// A VMM visits, for each of the COL_SHARE column phases p, every activation bit
// l (bit-streaming) and, for each bit, every PWA row group g: COL_SHARE x
// A_BITS x (ROWS/PWA_ROWS) conversion steps, 8 x 8 x 4 = 256 by default, one
// per clock. The row group loop is innermost and the phase loop outermost, so
// each lane finishes one column before it moves to the next and needs only
// one accumulator. This order and the one-step-per-clock rate are this
// design's choices; the paper gives the 16-row activation and the 8-column
// sharing, and notes they cost latency.
//
// Outputs: phase/bit_idx/grp drive the word lines and column multiplexers in
// the step itself (stage 0). The s1_* tags are the same step one clock later,
// aligned with the latched ADC codes and sum(I). s2_phase is the phase of the
// column whose result the lanes present one clock after that.
// start is accepted only when idle and captures mode and act_signed for the
// whole run; busy stays high until vmm_done (the output buffer's last write).
module cim_controller
#(
  parameter int unsigned A_BITS    = cim_pkg::A_BITS,
  parameter int unsigned ROWS      = cim_pkg::ROWS,
  parameter int unsigned PWA_ROWS  = cim_pkg::PWA_ROWS,
  parameter int unsigned COL_SHARE = cim_pkg::COL_SHARE,
  localparam int unsigned LW = $clog2(A_BITS),
  localparam int unsigned NGRP = ROWS / PWA_ROWS,
  localparam int unsigned GW = (NGRP > 1) ? $clog2(NGRP) : 1,
  localparam int unsigned PHW = (COL_SHARE > 1) ? $clog2(COL_SHARE) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  cim_pkg::flip_mode_e     mode_in,
  input  logic           act_signed_in,
  input  logic           vmm_done,
  output logic           busy,
  output logic           load,
  output cim_pkg::flip_mode_e     mode,
  output logic           act_signed,
  // stage 0
  output logic [PHW-1:0] phase,
  output logic [LW-1:0]  bit_idx,
  output logic [GW-1:0]  grp,
  // stage 1
  output logic           s1_valid,
  output logic           s1_first,
  output logic           s1_last,
  output logic [LW-1:0]  s1_bit_idx,
  output logic [PHW-1:0] s1_phase,
  // stage 2
  output logic [PHW-1:0] s2_phase
);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_e;
  state_e state;

  logic step_valid, step_first, step_last, last_step;

  assign load       = start && (state == S_IDLE);
  assign busy       = (state != S_IDLE);
  assign step_valid = (state == S_RUN);
  assign step_first = (int'(bit_idx) == 0) && (int'(grp) == 0);
  assign step_last  = (int'(bit_idx) == A_BITS - 1) && (int'(grp) == NGRP - 1);
  assign last_step  = step_last && (int'(phase) == COL_SHARE - 1);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      phase      <= '0;
      bit_idx    <= '0;
      grp        <= '0;
      mode       <= cim_pkg::MODE_CVM;
      act_signed <= 1'b0;
    end else begin
      case (state)
        S_IDLE: if (start) begin
          state      <= S_RUN;
          phase      <= '0;
          bit_idx    <= '0;
          grp        <= '0;
          mode       <= mode_in;
          act_signed <= act_signed_in;
        end
        S_RUN: begin
          if (int'(grp) == NGRP - 1) begin
            grp <= '0;
            if (int'(bit_idx) == A_BITS - 1) begin
              bit_idx <= '0;
              phase   <= PHW'(int'(phase) + 1);
            end else begin
              bit_idx <= LW'(int'(bit_idx) + 1);
            end
          end else begin
            grp <= GW'(int'(grp) + 1);
          end
          if (last_step) state <= S_DRAIN;
        end
        S_DRAIN: if (vmm_done) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // Rules of the run handshake: the output buffer may only report completion
  // of a run in flight, and no step is issued outside a run.
  a_done_in_drain: assert property (@(posedge clk) disable iff (!rst_n) vmm_done |-> state == S_DRAIN);
  a_step_in_run:   assert property (@(posedge clk) disable iff (!rst_n) s1_valid |-> busy);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s1_valid   <= 1'b0;
      s1_first   <= 1'b0;
      s1_last    <= 1'b0;
      s1_bit_idx <= '0;
      s1_phase   <= '0;
      s2_phase   <= '0;
    end else begin
      s1_valid   <= step_valid;
      s1_first   <= step_first;
      s1_last    <= step_last;
      s1_bit_idx <= bit_idx;
      s1_phase   <= phase;
      s2_phase   <= s1_phase;
    end
  end

endmodule
