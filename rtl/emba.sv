// emba -- Exact Multiple-input Binary Accumulator.
//
// Sums M product bitstreams exactly. Each cycle a Cycle Sum Adder counts how many
// of the M product bits are 1 (0 .. M) and this cycle sum is added to a running
// accumulator. After the 2^NBITS cycles of a pass the accumulator holds the total
// number of product ones, which is the dot product times 2^NBITS: the MAC value is
// acc / 2^NBITS in [0, M]. The divide is only a binary point, so the output keeps
// the full count and the reader places the point NBITS bits from the right
// (a real right shift would throw away every fractional bit).
//
// Widths follow the design: ceil(log2(M+1)) bits for the cycle sum and
// ceil(log2(M*2^NBITS+1)) bits for the accumulator, so it can never overflow.
//
// Timing: on the first cycle of a pass (ctl.first) the accumulator starts from 0
// instead of its old value, so passes run back to back. On the last cycle
// (ctl.last) the final count is copied into acc and valid pulses in the next
// cycle; acc holds until the next pass ends. Clearing on ctl.first and the output
// register are choices of this implementation.
module emba
  import ehtc_pkg::*;
#(
  parameter int unsigned M     = M_DEF,
  parameter int unsigned NBITS = NBITS_DEF,
  localparam int unsigned SW   = sum_w(M),
  localparam int unsigned CW   = cnt_w(M, NBITS)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [M-1:0]  p,          // product bits of this cycle
  input  pass_t         ctl,
  output logic [SW-1:0] cycle_sum,  // ones among p
  output logic [CW-1:0] acc,        // total ones of the last finished pass
  output logic          valid       // one-cycle pulse: acc was just updated
);

  logic [CW-1:0] run, run_next;

  // Cycle Sum Adder
  always_comb begin
    cycle_sum = '0;
    for (int i = 0; i < M; i++) cycle_sum = cycle_sum + SW'(p[i]);
  end

  // Accumulator input: restart from zero on the first cycle of a pass.
  assign run_next = (ctl.first ? CW'(0) : run) + CW'(cycle_sum);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run   <= '0;
      acc   <= '0;
      valid <= 1'b0;
    end else begin
      valid <= ctl.en && ctl.last;
      if (ctl.en)              run <= run_next;
      if (ctl.en && ctl.last)  acc <= run_next;
    end
  end

endmodule
