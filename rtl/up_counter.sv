// up_counter -- the single shared up-counter that sequences every bitstream
// generator of the design.
//
// All regulated (RB) and temporal (TB) bitstream generators of all MAC tiles read
// the same counter value, so one NBITS-bit counter serves the whole array. It
// counts 0, 1, ..., 2^NBITS-1 and wraps. Its enable ("en") and reset ("reset",
// here clr) pins come from the pass controller, as in the design's block diagram.
//
// Interface: clr (synchronous clear, has priority) and en are sampled on the rising
// clock edge; count is a register output. rst_n is an asynchronous active-low
// power-up reset, a choice of this implementation.
module up_counter #(
  parameter int unsigned NBITS = ehtc_pkg::NBITS_DEF
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clr,
  input  logic             en,
  output logic [NBITS-1:0] count
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      count <= '0;
    else if (clr)    count <= '0;
    else if (en)     count <= count + 1'b1;
  end

endmodule
