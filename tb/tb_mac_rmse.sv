// tb_mac_rmse -- workload test: accuracy of the 4x4 MAC tiles on random 8-bit
// dot products, in unipolar and bipolar mode, at default sizes.
//
// For 1000 random operand sets per mode, both tiles (exact accumulator and
// threshold scaled adder) compute a 4-element dot product in one 256-cycle pass
// each; the RMSE of the MAC value against the exact real-valued dot product is
// expressed in percent of one unit. The design reports 0.52 % (unipolar) and
// 2.09 % (bipolar) for both adders; this test requires 0.45..0.60 % and
// 1.85..2.35 %, and requires both tiles to give identical counts for identical
// operands (both adders are exact).
module tb_mac_rmse;
  import ehtc_pkg::*;
  localparam int unsigned M = M_DEF, NBITS = NBITS_DEF, L = 1 << NBITS;
  localparam int unsigned CW = cnt_w(M, NBITS);
  localparam int SETS = 1000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, bipolar, busy, done, gb1, tb1;
  logic [M-1:0][NBITS-1:0] xb0, yb0, xb1, yb1;
  logic [CW-1:0] ones0, ones1;
  logic signed [CW+1:0] value0, value1;
  logic signed [CW+2:0] value_sum;

  ehtc_top dut (.clk, .rst_n, .start, .bipolar, .chain(1'b0), .xb0, .yb0, .xb1, .yb1,
                .busy, .done, .ones0, .ones1, .value0, .value1, .value_sum, .gb1, .tb1);

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    #1000000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real frac(logic [NBITS-1:0] v, bit bip);
    return bip ? real'($signed(v)) / real'(L / 2) : real'(v) / real'(L);
  endfunction

  initial begin
    real se [2];
    real rmse_pct;
    start = 0; bipolar = 0; xb0 = '0; yb0 = '0; xb1 = '0; yb1 = '0;
    se[0] = 0.0; se[1] = 0.0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int bip = 0; bip < 2; bip++) begin
      for (int s = 0; s < SETS; s++) begin
        real ex0, ex1;
        for (int i = 0; i < M; i++) begin
          xb0[i] = NBITS'($urandom); yb0[i] = NBITS'($urandom);
          // every fifth set: tile 1 gets the same operands as tile 0
          xb1[i] = (s % 5 == 0) ? xb0[i] : NBITS'($urandom);
          yb1[i] = (s % 5 == 0) ? yb0[i] : NBITS'($urandom);
        end
        ex0 = 0.0; ex1 = 0.0;
        for (int i = 0; i < M; i++) begin
          ex0 += frac(xb0[i], bit'(bip)) * frac(yb0[i], bit'(bip));
          ex1 += frac(xb1[i], bit'(bip)) * frac(yb1[i], bit'(bip));
        end
        bipolar = bit'(bip);
        start = 1;
        @(posedge clk); #1;
        start = 0;
        while (!done) begin @(posedge clk); #1; end
        if (s % 5 == 0) chk(ones0 == ones1, "EMBA and DTSA tiles agree");
        se[bip] += (real'(value0) / real'(L) - ex0) ** 2 + (real'(value1) / real'(L) - ex1) ** 2;
      end
      rmse_pct = 100.0 * $sqrt(se[bip] / (2 * SETS));
      $display("%s 4x4 MAC RMSE %f %% (%0d dot products)", bip ? "bipolar " : "unipolar", rmse_pct, 2 * SETS);
      if (bip) chk(rmse_pct > 1.85 && rmse_pct < 2.35, "bipolar RMSE near 2.09 %");
      else     chk(rmse_pct > 0.45 && rmse_pct < 0.60, "unipolar RMSE near 0.52 %");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
