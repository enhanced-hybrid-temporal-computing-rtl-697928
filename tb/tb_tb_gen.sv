// tb_tb_gen -- exhaustive self-checking test of the temporal bitstream generator:
// for every 8-bit code the stream is 1 for exactly the first `code` cycles and 0
// after, i.e. it has one falling edge at cycle `code` and `code` ones.
module tb_tb_gen;
  localparam int unsigned NBITS = 8;
  logic [NBITS-1:0] count, code;
  logic tb;
  int checks = 0, failures = 0;

  tb_gen #(.NBITS(NBITS)) dut (.count, .code, .tb);

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
      int ones, edges; bit prev; ones = 0; edges = 0; prev = 1;
      code = NBITS'(x);
      for (int c = 0; c < 256; c++) begin
        count = NBITS'(c);
        #1;
        chk(tb == (c < x), $sformatf("code %0d count %0d", x, c));
        ones += tb;
        if (prev && !tb) edges++;
        prev = tb;
      end
      chk(ones == x, "ones equal code");
      chk(edges == 1, "single falling edge");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
