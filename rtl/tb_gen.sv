// tb_gen -- temporal bitstream (TB) generator.
//
// Encodes an NBITS-bit unsigned code as a temporal bitstream: the output is 1 while
// the shared counter is below the code and 0 afterwards, so all `code` ones come
// first and the value sits in the position of the single falling edge. This is the
// comparator "Count < Yb" of the design's TB generator drawing.
//
// Interface: purely combinational, tb follows count and code in the same cycle.
module tb_gen #(
  parameter int unsigned NBITS = ehtc_pkg::NBITS_DEF
) (
  input  logic [NBITS-1:0] count,
  input  logic [NBITS-1:0] code,
  output logic             tb
);

  assign tb = (count < code);

endmodule
