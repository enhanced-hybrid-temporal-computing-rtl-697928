// htc_mult -- hybrid temporal computing (HTC) multiplier.
//
// Multiplies two bitstreams bit by bit: one temporal bitstream (TB, ones first) and
// one regulated bitstream (RB, ones spread evenly). In unipolar mode (values in
// [0,1]) the product is the AND of the two bits; the number of ones of the output
// over a pass is then the number of RB ones that fall inside the TB's leading run
// of ones. In bipolar mode (values in [-1,1], a stream with fraction p of ones
// stands for 2p-1) the product is the XNOR of the two bits. AND/XNOR follows the
// design; a run-time mode pin that picks between them is this implementation's
// choice (the design was evaluated as separate unipolar and bipolar builds).
//
// Interface: purely combinational.
module htc_mult (
  input  logic bipolar,  // 0: unipolar AND, 1: bipolar XNOR
  input  logic t,        // TB bit
  input  logic r,        // RB bit
  output logic p         // product bit (general bitstream)
);

  assign p = bipolar ? ~(t ^ r) : (t & r);

endmodule
