// tb_dtsa -- self-checking test of the deterministic threshold-based scaled adder.
// (1) The design's 8-cycle table: product bits per cycle, and for each cycle the
//     expected cycle sum, A, Y and Q_next.
// (2) Random passes for M = 4 and M = 3: the number of ones of Y equals
//     floor(total / M), the final residual equals total mod M, and
//     #Y * M + residual equals the total.
module tb_dtsa;
  import ehtc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $time); end
  endtask

  logic [3:0] p4; pass_t c4; logic [2:0] cs4; logic [2:0] a4; logic y4; logic [1:0] q4;
  dtsa #(.M(4)) dut4 (.clk, .rst_n, .p(p4), .ctl(c4), .cycle_sum(cs4), .a(a4), .y(y4), .q_next(q4));

  logic [2:0] p3; pass_t c3; logic [1:0] cs3; logic [2:0] a3; logic y3; logic [1:0] q3;
  dtsa #(.M(3)) dut3 (.clk, .rst_n, .p(p3), .ctl(c3), .cycle_sum(cs3), .a(a3), .y(y3), .q_next(q3));

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // table rows: {M1,M2,M3,M4}, cycle sum, A, Y, Q_next
    logic [3:0] tp [8] = '{4'b1111, 4'b0010, 4'b1011, 4'b1001, 4'b1111, 4'b1111, 4'b1010, 4'b1111};
    int tcs [8] = '{4, 1, 3, 2, 4, 4, 2, 4};
    int ta  [8] = '{4, 1, 4, 2, 6, 6, 4, 4};
    int ty  [8] = '{1, 0, 1, 0, 1, 1, 1, 1};
    int tq  [8] = '{0, 1, 0, 2, 2, 2, 0, 0};
    int ny;
    c4 = '0; c3 = '0; p4 = '0; p3 = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    ny = 0;
    for (int c = 0; c < 8; c++) begin
      p4 = {tp[c][0], tp[c][1], tp[c][2], tp[c][3]};   // p4[0] = M1
      c4 = '0; c4.en = 1; c4.first = (c == 0); c4.last = (c == 7);
      #1;
      chk(cs4 == 3'(tcs[c]), $sformatf("table cycle %0d sum %0d", c + 1, cs4));
      chk(a4 == 3'(ta[c]), $sformatf("table cycle %0d A %0d", c + 1, a4));
      chk(y4 == ty[c][0], $sformatf("table cycle %0d Y", c + 1));
      chk(q4 == 2'(tq[c]), $sformatf("table cycle %0d Q_next %0d", c + 1, q4));
      ny += y4;
      @(negedge clk);
    end
    chk(ny == 6 && ny * 4 + 0 == 24, "table: 6 ones, 24 total");

    for (int pass = 0; pass < 30; pass++) begin
      int tot4, tot3, ny4, ny3, fq4, fq3, dens;
      tot4 = 0; tot3 = 0; ny4 = 0; ny3 = 0; fq4 = 0; fq3 = 0;
      dens = $urandom % 101;
      for (int c = 0; c < 256; c++) begin
        for (int i = 0; i < 4; i++) p4[i] = ($urandom % 100) < dens;
        for (int i = 0; i < 3; i++) p3[i] = ($urandom % 100) < dens;
        c4 = '0; c4.en = 1; c4.first = (c == 0); c4.last = (c == 255);
        c3 = c4;
        tot4 += $countones(p4); tot3 += $countones(p3);
        #1;
        ny4 += y4; ny3 += y3;
        chk(q4 < 4 && q3 < 3, "residual bounded");
        fq4 = q4; fq3 = q3;
        @(negedge clk);
      end
      chk(ny4 == tot4 / 4, $sformatf("M=4 #Y %0d total %0d", ny4, tot4));
      chk(fq4 == tot4 % 4, "M=4 remainder");
      chk(ny4 * 4 + fq4 == tot4, "M=4 reconstruct");
      chk(ny3 == tot3 / 3, $sformatf("M=3 #Y %0d total %0d", ny3, tot3));
      chk(fq3 == tot3 % 3, "M=3 remainder");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
