// bs2bin -- bitstream-to-binary converter for the DTSA output.
//
// Rebuilds the exact number of product ones of a DTSA pass. An output accumulator
// counts the ones of the DTSA stream Y over the 2^NBITS cycles (it needs only
// ceil(log2(2^NBITS+1)) bits since Y carries at most one 1 per cycle). At the end
// of the pass the count is multiplied by M (a left shift for M a power of two) and
// the DTSA's final remainder is added: ones = #Y * M + Q_next. As for the exact
// accumulator, the MAC value is ones / 2^NBITS and the divide is left as a binary
// point.
//
// Timing: the Y counter starts from 0 on ctl.first; on ctl.last the result is
// registered and valid pulses in the next cycle; ones holds until the next pass
// ends.
module bs2bin
  import ehtc_pkg::*;
#(
  parameter int unsigned M     = M_DEF,
  parameter int unsigned NBITS = NBITS_DEF,
  localparam int unsigned QW   = res_w(M),
  localparam int unsigned YW   = $clog2((2 ** NBITS) + 1),
  localparam int unsigned CW   = cnt_w(M, NBITS)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          y,          // DTSA output stream
  input  logic [QW-1:0] q_next,     // DTSA residual (remainder on ctl.last)
  input  pass_t         ctl,
  output logic [CW-1:0] ones,       // #Y * M + remainder of the last pass
  output logic [YW-1:0] ycount,     // #Y of the last pass
  output logic          valid
);

  logic [YW-1:0] run, run_next;

  assign run_next = (ctl.first ? YW'(0) : run) + YW'(y);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run    <= '0;
      ones   <= '0;
      ycount <= '0;
      valid  <= 1'b0;
    end else begin
      valid <= ctl.en && ctl.last;
      if (ctl.en) run <= run_next;
      if (ctl.en && ctl.last) begin
        ycount <= run_next;
        ones   <= CW'(run_next) * CW'(M) + CW'(q_next);
      end
    end
  end

endmodule
