// ehtc_pkg -- shared types and constants of the E-HTC (enhanced hybrid temporal
// computing) MAC design.
//
// Every block of the design runs in lock-step "passes": one pass is 2^NBITS clock
// cycles in which each multiplier produces one product bit per cycle. The pass
// controller (pass_fsm) broadcasts a small strobe bundle, pass_t, that tells every
// stateful block when a pass starts (first), ends (last) and when new operands are
// taken (load). Carrying these strobes in one struct is this design's own choice.
//
// The default sizes (8-bit operands, 4-input MAC tiles) are the ones the design
// was evaluated with; the adder flavours are the two deterministic adders of the
// design: the exact accumulator (EMBA) and the threshold scaled adder (DTSA).
package ehtc_pkg;

  // Operand precision in bits; a pass lasts 2^NBITS cycles (256 at the default).
  localparam int unsigned NBITS_DEF = 8;
  // Number of multipliers (inputs) per MAC tile.
  localparam int unsigned M_DEF     = 4;

  // Adder flavour of a MAC tile.
  typedef enum logic [0:0] {
    ADDER_EMBA = 1'b0,   // exact multiple-input binary accumulator
    ADDER_DTSA = 1'b1    // deterministic threshold-based scaled adder
  } adder_e;

  // Strobes a pass controller sends to every stateful block, all synchronous.
  typedef struct packed {
    logic en;     // a bitstream cycle happens in this clock cycle
    logic clr;    // synchronous reset of the shared up-counter
    logic load;   // take new operands at the end of this clock cycle
    logic first;  // this is cycle 0 of a pass (accumulators start from zero)
    logic last;   // this is cycle 2^NBITS-1 of a pass (results are captured)
  } pass_t;

  // Width of the per-cycle sum of m one-bit inputs: ceil(log2(m+1)).
  function automatic int unsigned sum_w(input int unsigned m);
    return $clog2(m + 1);
  endfunction

  // Width of a count of ones over a pass of 2^nbits cycles on m inputs:
  // ceil(log2(m*2^nbits + 1)).
  function automatic int unsigned cnt_w(input int unsigned m, input int unsigned nbits);
    return $clog2(m * (2 ** nbits) + 1);
  endfunction

  // Width of the DTSA residual register: ceil(log2(m)), at least 1.
  function automatic int unsigned res_w(input int unsigned m);
    return (m > 1) ? $clog2(m) : 1;
  endfunction

endpackage
