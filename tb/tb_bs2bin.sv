// tb_bs2bin -- self-checking test of the bitstream-to-binary converter.
// (1) The design's example on a 3-bit instance: Y = 1,0,1,0,1,1,1,1 (cycle 1 first)
//     and final remainder 0 give 6 ones of Y and 6*4 + 0 = 24 (= 3.0).
// (2) Random 8-bit passes with a threshold-adder model in the testbench producing
//     Y and the residual: the converter must return the exact total of product
//     ones, with valid one cycle after the last cycle.
module tb_bs2bin;
  import ehtc_pkg::*;
  localparam int unsigned M = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $time); end
  endtask

  logic y3; logic [1:0] q3; pass_t c3; logic [cnt_w(M,3)-1:0] o3; logic [3:0] yc3; logic v3;
  bs2bin #(.M(M), .NBITS(3)) dut3 (.clk, .rst_n, .y(y3), .q_next(q3), .ctl(c3), .ones(o3), .ycount(yc3), .valid(v3));

  logic y8; logic [1:0] q8; pass_t c8; logic [cnt_w(M,8)-1:0] o8; logic [8:0] yc8; logic v8;
  bs2bin #(.M(M), .NBITS(8)) dut8 (.clk, .rst_n, .y(y8), .q_next(q8), .ctl(c8), .ones(o8), .ycount(yc8), .valid(v8));

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ty [8] = '{1, 0, 1, 0, 1, 1, 1, 1};
    int tq [8] = '{0, 1, 0, 2, 2, 2, 0, 0};
    c3 = '0; c8 = '0; y3 = 0; y8 = 0; q3 = 0; q8 = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int c = 0; c < 8; c++) begin
      y3 = ty[c][0]; q3 = 2'(tq[c]);
      c3 = '0; c3.en = 1; c3.first = (c == 0); c3.last = (c == 7);
      @(negedge clk);
    end
    c3 = '0;
    chk(v3 == 1, "example valid");
    chk(yc3 == 6, "example #Y = 6");
    chk(o3 == 24, $sformatf("example ones %0d", o3));

    for (int pass = 0; pass < 20; pass++) begin
      int total, q, dens, a, cs;
      total = 0; q = 0;
      dens = $urandom % 101;
      for (int c = 0; c < 256; c++) begin
        cs = 0;
        for (int i = 0; i < M; i++) cs += int'(($urandom % 100) < dens);
        total += cs;
        a = q + cs;
        y8 = (a >= M);
        q  = y8 ? a - M : a;
        q8 = 2'(q);
        c8 = '0; c8.en = 1; c8.first = (c == 0); c8.last = (c == 255);
        @(negedge clk);
      end
      chk(v8 == 1, "valid after last");
      chk(o8 == total, $sformatf("pass %0d total %0d got %0d", pass, total, o8));
    end
    c8 = '0;
    @(negedge clk);
    chk(v8 == 0, "valid is a pulse");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
