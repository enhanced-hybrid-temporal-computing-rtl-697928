// rb_gen -- regulated bitstream (RB) generator.
//
// Turns an NBITS-bit unsigned code into a bitstream of 2^NBITS bits whose ones are
// spread evenly: operand bit i (weight 2^i) is output in exactly 2^i cycles of the
// pass, so the stream holds exactly `code` ones. It is a multiplexer steered by the
// shared counter: when the counter value ends in exactly k ones (k = 0 .. NBITS-1)
// the multiplexer passes code[NBITS-1-k]. Half the cycles (count ending in 0) show
// the MSB, a quarter (ending in 01) the next bit, and so on; the single count that
// is all ones emits 0.
//
// The multiplexer and its select patterns (xxxxxxx0 -> Xb[7], xxxxxx01 -> Xb[6],
// ...) follow the design's RB generator drawing. Which of the two last counts
// (0111..1 or 1111..1) carries the LSB is not legible there; this implementation
// gives it to 0111..1.
//
// Interface: purely combinational, rb follows count and code in the same cycle.
module rb_gen #(
  parameter int unsigned NBITS = ehtc_pkg::NBITS_DEF
) (
  input  logic [NBITS-1:0] count,
  input  logic [NBITS-1:0] code,
  output logic             rb
);

  typedef logic [NBITS-1:0] word_t;

  // Ones in bits k-1 .. 0.
  function automatic word_t low_mask(input int k);
    return word_t'((word_t'(1) << k) - word_t'(1));
  endfunction

  always_comb begin
    rb = 1'b0;
    // Exactly one k (or none, for the all-ones count) has count[k] == 0 with
    // every bit below it 1.
    for (int k = 0; k < NBITS; k++) begin
      if (!count[k] && ((count & low_mask(k)) == low_mask(k)))
        rb = code[NBITS-1-k];
    end
  end

endmodule
