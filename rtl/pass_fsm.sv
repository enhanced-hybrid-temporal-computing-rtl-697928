// pass_fsm -- controller of the bitstream pass.
//
// A pass is 2^NBITS clock cycles during which the shared up-counter runs from 0 to
// 2^NBITS-1 and every multiplier emits one product bit per cycle (256 cycles for
// 8-bit operands). The controller has two states. In IDLE it waits for start; when
// start is seen it raises load (operands are registered by the tiles) and clr
// (counter to zero) and moves to RUN. In RUN it raises en every cycle, first in
// the cycle with count 0 and last in the cycle with count 2^NBITS-1. If start is
// high during that last cycle the next pass follows with no idle cycle (load is
// raised again, the counter simply wraps); otherwise it returns to IDLE.
// done pulses for one cycle right after the last cycle: the tiles' result
// registers are valid from then on and hold until the next pass ends.
//
// The design's block diagram only names an "FSM" driving the counter's en and
// reset; the state encoding, the back-to-back behaviour and the done timing are
// choices of this implementation.
module pass_fsm
  import ehtc_pkg::*;
#(
  parameter int unsigned NBITS = NBITS_DEF
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [NBITS-1:0] count,
  output pass_t            ctl,
  output logic             busy,
  output logic             done
);

  typedef enum logic [0:0] {S_IDLE = 1'b0, S_RUN = 1'b1} state_e;
  state_e state;

  localparam logic [NBITS-1:0] CNT_LAST = '1;

  always_comb begin
    ctl       = '0;
    ctl.en    = (state == S_RUN);
    ctl.first = (state == S_RUN) && (count == '0);
    ctl.last  = (state == S_RUN) && (count == CNT_LAST);
    ctl.load  = start && ((state == S_IDLE) || ctl.last);
    ctl.clr   = start && (state == S_IDLE);
  end

  assign busy = (state == S_RUN);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      done  <= 1'b0;
    end else begin
      done <= ctl.last;
      unique case (state)
        S_IDLE: if (start)                state <= S_RUN;
        S_RUN:  if (ctl.last && !start)   state <= S_IDLE;
        default:                          state <= S_IDLE;
      endcase
    end
  end

  // first and last can only coincide for a one-cycle pass, which NBITS >= 1 rules out.
  a_first_last: assert property (@(posedge clk) disable iff (!rst_n) !(ctl.first && ctl.last));

endmodule
