// dtsa -- Deterministic Threshold-based Scaled Adder.
//
// Adds M product bitstreams and scales the sum by 1/M without any random source.
// Each cycle the M product bits are counted by a Cycle Sum Adder (0 .. M); the
// count is added to a small residual register Q_reg giving A = Q_reg + cycle_sum.
// If A >= M the adder emits a 1 on its output stream Y and keeps A - M, otherwise
// it emits 0 and keeps A. Over a pass, Y therefore carries floor(total / M) ones
// and Q_reg ends holding the remainder total mod M. Y is an ordinary (general)
// bitstream that can feed further HTC stages; Y together with the final remainder
// lets bs2bin rebuild the exact total.
//
// Threshold M, the residual register width ceil(log2(M)) and the start value 0
// of the residual at the beginning of a pass follow the design. Y is produced
// combinationally in the same cycle as A, as in the design's cycle table.
//
// Interface: y and q_next are valid in every cycle with ctl.en; q_next in the
// cycle with ctl.last is the remainder of the pass. a is exposed for observation.
module dtsa
  import ehtc_pkg::*;
#(
  parameter int unsigned M  = M_DEF,
  localparam int unsigned SW = sum_w(M),
  localparam int unsigned QW = res_w(M),
  localparam int unsigned AW = $clog2(2 * M)   // holds up to (M-1) + M
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [M-1:0]  p,          // product bits of this cycle
  input  pass_t         ctl,
  output logic [SW-1:0] cycle_sum,
  output logic [AW-1:0] a,          // running total A = Q_reg + cycle_sum
  output logic          y,          // scaled output bitstream
  output logic [QW-1:0] q_next      // residual after this cycle
);

  logic [QW-1:0] q_reg;
  logic [AW-1:0] a_sub;

  always_comb begin
    cycle_sum = '0;
    for (int i = 0; i < M; i++) cycle_sum = cycle_sum + SW'(p[i]);
  end

  // Running Total Adder; the residual counts as 0 on the first cycle of a pass.
  assign a = (ctl.first ? AW'(0) : AW'(q_reg)) + AW'(cycle_sum);

  // Comparator, Subtractor and MUX.
  assign a_sub  = a - AW'(M);
  assign y      = ctl.en && (a >= AW'(M));
  assign q_next = y ? QW'(a_sub) : QW'(a);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      q_reg <= '0;
    else if (ctl.en) q_reg <= q_next;
  end

endmodule
