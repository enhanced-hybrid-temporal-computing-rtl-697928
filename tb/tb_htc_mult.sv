// tb_htc_mult -- self-checking test of the HTC multiplier: AND in unipolar mode,
// XNOR in bipolar mode, on all input combinations, plus the design's two worked
// examples (unipolar RB 6/8 x TB 5/8 -> 4 ones; bipolar RB -2/4 x TB 3/4 ->
// 3 ones, value 2*3/8-1 = -1/4) on 8-bit streams given bit by bit.
module tb_htc_mult;
  logic bipolar, t, r, p;
  int checks = 0, failures = 0;

  htc_mult dut (.bipolar, .t, .r, .p);

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] rb_u = 8'b11101011, tb_u = 8'b11111000;   // first cycle on the left
    logic [7:0] rb_b = 8'b01000100, tb_b = 8'b11111110;
    int ones;
    for (int i = 0; i < 8; i++) begin
      {bipolar, t, r} = 3'(i);
      #1;
      chk(p == (bipolar ? (t == r) : (t && r)), $sformatf("mode %0d t %0d r %0d", bipolar, t, r));
    end
    ones = 0; bipolar = 0;
    for (int c = 7; c >= 0; c--) begin t = tb_u[c]; r = rb_u[c]; #1; ones += p; end
    chk(ones == 4, "unipolar example 6/8 x 5/8 gives 4/8");
    ones = 0; bipolar = 1;
    for (int c = 7; c >= 0; c--) begin t = tb_b[c]; r = rb_b[c]; #1; ones += p; end
    chk(ones == 3, "bipolar example gives 3/8");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
