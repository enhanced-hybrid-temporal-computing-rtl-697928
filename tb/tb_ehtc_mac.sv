// tb_ehtc_mac -- self-checking test of one 4x4 E-HTC MAC tile at full size
// (8-bit operands, 256-cycle passes), with one EMBA tile and one DTSA tile fed the
// same operands. Pass strobes and the shared counter come from a small model in
// the testbench. For random operands in unipolar and bipolar mode it checks:
//   - ones equals the bit-level reference (RB/TB generators, AND/XNOR products);
//   - value equals ones (unipolar) or 2*ones - 4*256 (bipolar);
//   - the result stays within a small error of the exact dot product;
//   - valid pulses one cycle after the last of the 256 cycles;
//   - the DTSA tile's TB output in the next pass carries floor(ones/4) leading ones;
//   - operands changed during a pass do not disturb it (they are registered);
//   - with ext_sel set for lane 2 (from pass 12 on), that lane multiplies an
//     external temporal stream of random length T instead of its own TB.
module tb_ehtc_mac;
  import ehtc_pkg::*;
  import ehtc_ref_pkg::*;
  localparam int unsigned M = 4, NBITS = 8, L = 1 << NBITS;
  localparam int unsigned CW = cnt_w(M, NBITS);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic bipolar;
  logic [M-1:0][NBITS-1:0] xb, yb;
  logic [NBITS-1:0] count;
  logic [M-1:0] tb_ext, ext_sel;
  pass_t ctl;
  logic [CW-1:0] ones_e, ones_d;
  logic signed [CW+1:0] val_e, val_d;
  logic valid_e, valid_d, gb_e, tb_e, gb_d, tb_d;

  ehtc_mac #(.M(M), .NBITS(NBITS), .ADDER(ADDER_EMBA)) dut_e (
    .clk, .rst_n, .bipolar, .xb, .yb, .count, .tb_ext, .ext_sel, .ctl,
    .ones(ones_e), .value(val_e), .valid(valid_e), .gb(gb_e), .tb(tb_e));
  ehtc_mac #(.M(M), .NBITS(NBITS), .ADDER(ADDER_DTSA)) dut_d (
    .clk, .rst_n, .bipolar, .xb, .yb, .count, .tb_ext, .ext_sel, .ctl,
    .ones(ones_d), .value(val_d), .valid(valid_d), .gb(gb_d), .tb(tb_d));

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp_ones, prev_ones, tb_ones;
    real exact, got, err;
    bit bip;
    int tlen;
    ctl = '0; count = '0; bipolar = 0; xb = '0; yb = '0; tb_ext = '0; ext_sel = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    prev_ones = -1;
    for (int pass = 0; pass < 24; pass++) begin
      bip = (pass % 3) == 2;
      for (int i = 0; i < M; i++) begin
        xb[i] = NBITS'($urandom);
        yb[i] = NBITS'($urandom);
      end
      if (pass == 0) begin xb = '1; yb = '1; end   // 255/256 * 255/256 each
      bipolar = bip;
      exp_ones = 0;
      exact = 0.0;
      ext_sel = (pass >= 12) ? 4'b0100 : 4'b0000;
      tlen = $urandom % (L + 1);
      for (int i = 0; i < M; i++) begin
        if (ext_sel[i]) begin
          // lane fed by an external TB of tlen ones
          for (int c = 0; c < L; c++) begin
            bit r, t;
            r = ref_rb(c, ref_code(yb[i], bip, NBITS), NBITS);
            t = c < tlen;
            exp_ones += bip ? int'(t == r) : int'(t & r);
          end
          if (bip) exact += (2.0 * tlen / L - 1.0) * (real'($signed(yb[i])) / 128.0);
          else     exact += (real'(tlen) / L) * (real'(yb[i]) / 256.0);
          continue;
        end
        exp_ones += ref_prod_ones(xb[i], yb[i], bip, NBITS);
        if (bip) exact += (real'($signed(xb[i])) / 128.0) * (real'($signed(yb[i])) / 128.0);
        else     exact += (real'(xb[i]) / 256.0) * (real'(yb[i]) / 256.0);
      end
      // load cycle
      ctl = '0; ctl.load = 1;
      @(negedge clk);
      tb_ones = 0;
      for (int c = 0; c < L; c++) begin
        count = NBITS'(c);
        ctl = '0; ctl.en = 1; ctl.first = (c == 0); ctl.last = (c == L - 1);
        if (c == 10) begin xb = ~xb; yb = ~yb; bipolar = ~bip; ext_sel = ~ext_sel; end  // must not matter
        tb_ext = {M{c < tlen}};
        #1;
        tb_ones += tb_d;
        if (prev_ones >= 0) chk(tb_d == (c < prev_ones / 4), "DTSA TB output");
        chk(tb_e == 0 && gb_e == 0, "EMBA tile has no stream output");
        chk(valid_e == 0 && valid_d == 0, "no valid during pass");
        @(negedge clk);
      end
      ctl = '0;
      chk(valid_e && valid_d, "valid one cycle after the last cycle");
      chk(ones_e == CW'(exp_ones), $sformatf("pass %0d EMBA ones %0d exp %0d", pass, ones_e, exp_ones));
      chk(ones_d == CW'(exp_ones), $sformatf("pass %0d DTSA ones %0d exp %0d", pass, ones_d, exp_ones));
      if (bip) begin
        chk(int'(val_e) == 2 * exp_ones - int'(M * L), $sformatf("bipolar value EMBA %0d ones %0d", val_e, exp_ones));
        chk(int'(val_d) == 2 * exp_ones - int'(M * L), "bipolar value DTSA");
        got = real'(val_e) / real'(L);
      end else begin
        chk(val_e == exp_ones && val_d == exp_ones, "unipolar value");
        got = real'(val_e) / real'(L);
      end
      err = got - exact; if (err < 0) err = -err;
      chk(err < (bip ? 0.5 : 0.1), $sformatf("pass %0d value %f exact %f", pass, got, exact));
      prev_ones = exp_ones;
      @(negedge clk);
      chk(!valid_e && !valid_d, "valid is a pulse");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
