// gb2tb -- general-bitstream to temporal-bitstream converter.
//
// Re-encodes a bitstream whose ones lie anywhere (a general bitstream, GB, such as
// the DTSA output) as a temporal bitstream (TB) with all its ones first, so that a
// result can enter the next HTC multiplier stage. It is built from two 2^NBITS-bit
// shift registers. During a pass, the collect register shifts in a 1 at its low
// end for every 1 of the GB input, so its ones pile up contiguously from bit 0.
// On the last cycle of the pass its content moves to the emit register, which
// during the following pass shifts right once per cycle and outputs its bit 0:
// the ones come out first, then zeros.
//
// The design only says the conversion uses "straightforward shift registers";
// the thermometer-collect / shift-out arrangement, the double buffering and the
// one-pass latency are this implementation's choices.
//
// Timing: the TB of pass k appears on tb during pass k+1, cycle-aligned with the
// shared counter (cycle j of pass k+1 outputs bit j of the TB). Between passes the
// emit register holds.
module gb2tb
  import ehtc_pkg::*;
#(
  parameter int unsigned NBITS = NBITS_DEF,
  localparam int unsigned L    = 2 ** NBITS
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  gb,
  input  pass_t ctl,
  output logic  tb
);

  logic [L-1:0] collect, collect_base, collect_next, emit;

  assign collect_base = ctl.first ? '0 : collect;
  assign collect_next = gb ? {collect_base[L-2:0], 1'b1} : collect_base;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      collect <= '0;
      emit    <= '0;
    end else if (ctl.en) begin
      collect <= collect_next;
      if (ctl.last) emit <= collect_next;
      else          emit <= emit >> 1;
    end
  end

  assign tb = emit[0];

endmodule
