// tb_rb_gen -- exhaustive self-checking test of the regulated bitstream generator
// at 8 bits: every code at every count against the reference model, the number of
// ones per pass (must equal the code), bit i of the code appearing in exactly 2^i
// cycles, and the select patterns of the design's drawing (count ...0 -> bit 7,
// count ...01 -> bit 6, ...). Also a 3-bit instance over its 8-cycle stream.
module tb_rb_gen;
  import ehtc_ref_pkg::*;
  localparam int unsigned NBITS = 8;
  logic [NBITS-1:0] count, code;
  logic rb;
  logic [2:0] count3, code3;
  logic rb3;
  int checks = 0, failures = 0;

  rb_gen #(.NBITS(NBITS)) dut  (.count, .code, .rb);
  rb_gen #(.NBITS(3))     dut3 (.count(count3), .code(code3), .rb(rb3));

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  initial begin
    #1000000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int x = 0; x < 256; x++) begin
      int ones; ones = 0;

      code = NBITS'(x);
      for (int c = 0; c < 256; c++) begin
        count = NBITS'(c);
        #1;
        chk(rb == ref_rb(c, x, NBITS), $sformatf("code %0d count %0d", x, c));
        ones += rb;
      end
      chk(ones == x, $sformatf("ones %0d for code %0d", ones, x));
    end
    // each single-bit code i appears 2^i times
    for (int i = 0; i < NBITS; i++) begin
      int ones; ones = 0;
      code = NBITS'(1) << i;
      for (int c = 0; c < 256; c++) begin count = NBITS'(c); #1; ones += rb; end
      chk(ones == (1 << i), $sformatf("bit %0d appears %0d times", i, ones));
    end
    // select patterns printed in the drawing
    code = 8'b1000_0000; count = 8'b1010_1010; #1; chk(rb == 1, "xxxxxxx0 selects bit 7");
    code = 8'b0100_0000; count = 8'b1010_1001; #1; chk(rb == 1, "xxxxxx01 selects bit 6");
    code = 8'b0000_0010; count = 8'b1011_1111; #1; chk(rb == 1, "x0111111 selects bit 1");
    code = 8'b1111_1111; count = 8'b1111_1111; #1; chk(rb == 0, "all-ones count emits 0");
    // 3-bit stream: 8 cycles, ones equal the code
    for (int x = 0; x < 8; x++) begin
      int ones; ones = 0;
      code3 = 3'(x);
      for (int c = 0; c < 8; c++) begin count3 = 3'(c); #1; ones += rb3; end
      chk(ones == x, $sformatf("3-bit code %0d gives %0d ones", x, ones));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
