// tb_ehtc_top -- end-to-end test of the two-tile E-HTC engine at its default
// parameters (two 4-input tiles, 8-bit operands, 256-cycle passes; tile 0 exact
// accumulator, tile 1 threshold scaled adder). A sequence of passes in unipolar and
// bipolar mode, single and back to back, is checked against the bit-level
// reference model:
//   - ones0, ones1, value0, value1 and value_sum are exact against the model;
//   - a pass takes 256 cycles, done arrives 257 cycles after an accepted start
//     from idle and every 256 cycles for back-to-back passes;
//   - tile 1's GB output stream has floor(ones1/4) ones and its TB output carries
//     them as a leading run in the next pass.
// It counts how often each mechanism occurred (unipolar pass, bipolar pass,
// back-to-back pass, restart from idle, threshold output 1 of the DTSA, non-zero
// DTSA remainder, TB re-encoding checked, full-scale operands, in-stream chained
// pass where tile 0 consumes tile 1's re-encoded result) and fails if one never
// did.
module tb_ehtc_top;
  import ehtc_pkg::*;
  import ehtc_ref_pkg::*;
  localparam int unsigned M = M_DEF, NBITS = NBITS_DEF, L = 1 << NBITS;
  localparam int unsigned CW = cnt_w(M, NBITS);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, bipolar, chain, busy, done, gb1, tb1;
  logic [M-1:0][NBITS-1:0] xb0, yb0, xb1, yb1;
  logic [CW-1:0] ones0, ones1;
  logic signed [CW+1:0] value0, value1;
  logic signed [CW+2:0] value_sum;

  ehtc_top dut (.clk, .rst_n, .start, .bipolar, .chain, .xb0, .yb0, .xb1, .yb1,
                .busy, .done, .ones0, .ones1, .value0, .value1, .value_sum, .gb1, .tb1);

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $time); end
  endtask

  int n_uni = 0, n_bip = 0, n_b2b = 0, n_restart = 0, n_thresh = 0, n_rem = 0, n_tbconv = 0, n_full = 0, n_chain = 0;

  initial begin
    #1000000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected results of the operands last presented; ones1 of the previous pass
  int exp0, exp1, prev1;
  bit exp_bip;

  // ch: tile 0 lane 0 takes the TB re-encoding of tile 1's result of the pass
  // before (exp1 / 4 leading ones) instead of xb0[0].
  task automatic new_operands(bit bip, bit full, bit ch = 0);
    int tlen;
    tlen = exp1 / 4;
    bipolar = bip;
    chain = ch;
    for (int i = 0; i < M; i++) begin
      xb0[i] = NBITS'($urandom); yb0[i] = NBITS'($urandom);
      xb1[i] = NBITS'($urandom); yb1[i] = NBITS'($urandom);
    end
    if (full) begin xb0 = '1; yb0 = '1; xb1 = '1; yb1 = '1; end
    exp0 = 0; exp1 = 0;
    for (int i = 0; i < M; i++) begin
      if (i == 0 && ch) begin
        for (int c = 0; c < L; c++) begin
          bit r, t;
          r = ref_rb(c, ref_code(yb0[0], bip, NBITS), NBITS);
          t = c < tlen;
          exp0 += bip ? int'(t == r) : int'(t & r);
        end
      end else
        exp0 += ref_prod_ones(xb0[i], yb0[i], bip, NBITS);
      exp1 += ref_prod_ones(xb1[i], yb1[i], bip, NBITS);
    end
    exp_bip = bip;
    if (ch) n_chain++;
    if (full) n_full++;
  endtask

  task automatic check_results(int exp0, int exp1, bit exp_bip);
    int v0, v1;
    v0 = exp_bip ? 2 * exp0 - int'(M * L) : exp0;
    v1 = exp_bip ? 2 * exp1 - int'(M * L) : exp1;
    chk(ones0 == CW'(exp0), $sformatf("ones0 %0d exp %0d", ones0, exp0));
    chk(ones1 == CW'(exp1), $sformatf("ones1 %0d exp %0d", ones1, exp1));
    chk(int'(value0) == v0 && int'(value1) == v1, "values");
    chk(int'(value_sum) == v0 + v1, "value_sum");
    if (exp_bip) n_bip++; else n_uni++;
    if (exp1 % 4 != 0) n_rem++;
  endtask

  // Runs the 256 cycles of one pass; called right after the clock edge that
  // accepted its start. If cont is set, the next pass's operands are presented
  // with start during the last cycle, so the next pass follows with no gap.
  task automatic run_pass(bit cont, bit next_bip, bit next_chain = 0);
    int gb_ones, c0, c1;
    bit cb;
    gb_ones = 0;
    for (int c = 0; c < L; c++) begin
      chk(busy == 1, "busy during pass");
      if (c > 0) chk(done == 0, "no done inside a pass");
      gb_ones += gb1;
      if (gb1) n_thresh++;
      if (prev1 >= 0) chk(tb1 == (c < prev1 / 4), $sformatf("TB re-encoding cycle %0d of %0d", c, prev1 / 4));
      if (c == L - 1) begin
        c0 = exp0; c1 = exp1; cb = exp_bip;
        if (cont) begin new_operands(next_bip, 0, next_chain); start = 1; n_b2b++; end
        else start = 0;
      end
      @(posedge clk); #1;
    end
    // done exactly 256 clock edges after the accepting edge
    chk(done == 1, "done one cycle after the last pass cycle");
    chk(busy == cont, "busy only if the next pass follows");
    check_results(c0, c1, cb);
    chk(gb_ones == c1 / 4, $sformatf("GB ones %0d exp %0d", gb_ones, c1 / 4));
    if (prev1 >= 0) n_tbconv++;
    prev1 = c1;
  endtask

  initial begin
    start = 0; bipolar = 0; chain = 0; exp1 = 0; xb0 = '0; yb0 = '0; xb1 = '0; yb1 = '0;
    prev1 = -1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // single passes from idle, alternating modes, the first at full scale
    for (int k = 0; k < 6; k++) begin
      new_operands(k % 2 == 1, k == 0);
      start = 1;
      @(posedge clk); #1;
      start = 0;
      n_restart++;
      run_pass(0, 0);
      repeat (3) begin
        @(posedge clk); #1;
        chk(busy == 0 && done == 0, "idle between passes");
      end
    end
    // back-to-back passes with start held high, modes alternating
    new_operands(0, 0);
    start = 1;
    @(posedge clk); #1;
    n_restart++;
    for (int k = 0; k < 6; k++) run_pass(k < 5, k % 2 == 0);
    // two-stage in-stream chains, back to back: each pass feeds tile 1's
    // re-encoded result into tile 0 lane 0 of the next pass
    repeat (2) @(posedge clk); #1;
    new_operands(0, 0, 0);
    start = 1;
    @(posedge clk); #1;
    for (int k = 0; k < 6; k++) run_pass(k < 5, k >= 3, 1);
    // and from idle: the TB register keeps the last result across the gap
    repeat (4) @(posedge clk); #1;
    new_operands(1, 0, 1);
    start = 1;
    @(posedge clk); #1;
    run_pass(0, 0);
    chk(n_uni > 0, "unipolar pass happened");
    chk(n_bip > 0, "bipolar pass happened");
    chk(n_b2b > 0, "back-to-back pass happened");
    chk(n_restart > 0, "restart from idle happened");
    chk(n_thresh > 0, "DTSA threshold output happened");
    chk(n_rem > 0, "non-zero DTSA remainder happened");
    chk(n_tbconv > 0, "TB re-encoding checked");
    chk(n_full > 0, "full-scale operands used");
    chk(n_chain > 0, "in-stream chained pass happened");
    $display("mechanisms: unipolar=%0d bipolar=%0d back_to_back=%0d restart=%0d dtsa_ones=%0d remainder=%0d tb_reencode=%0d full_scale=%0d chained=%0d",
             n_uni, n_bip, n_b2b, n_restart, n_thresh, n_rem, n_tbconv, n_full, n_chain);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
