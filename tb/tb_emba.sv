// tb_emba -- self-checking test of the exact multiple-input binary accumulator.
// (1) The design's worked example on a 3-bit (8-cycle) instance: four streams of
//     value 7/8, 4/8, 7/8, 6/8 give cycle sums 4,1,3,2,4,4,2,4 (cycle 1 first) and a
//     total of 24 = 3.0 with three fractional bits.
// (2) Random 8-bit passes, run back to back, against a sum of the product bits;
//     valid must pulse exactly one cycle after each pass's last cycle, and the
//     result must hold while the next pass runs.
module tb_emba;
  import ehtc_pkg::*;
  localparam int unsigned M = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $time); end
  endtask

  // 3-bit instance
  logic [M-1:0] p3;
  pass_t ctl3;
  logic [2:0] cs3;
  logic [cnt_w(M,3)-1:0] acc3;
  logic valid3;
  emba #(.M(M), .NBITS(3)) dut3 (.clk, .rst_n, .p(p3), .ctl(ctl3), .cycle_sum(cs3), .acc(acc3), .valid(valid3));

  // 8-bit instance
  logic [M-1:0] p8;
  pass_t ctl8;
  logic [2:0] cs8;
  logic [cnt_w(M,8)-1:0] acc8;
  logic valid8;
  emba #(.M(M), .NBITS(8)) dut8 (.clk, .rst_n, .p(p8), .ctl(ctl8), .cycle_sum(cs8), .acc(acc8), .valid(valid8));

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // streams of the example, bit 0 = cycle 1
    logic [7:0] s [M] = '{8'b11111101, 8'b10110001, 8'b11110111, 8'b10111101};
    int exp_cs [8] = '{4, 1, 3, 2, 4, 4, 2, 4};
    int unsigned total, prev;
    ctl3 = '0; ctl8 = '0; p3 = '0; p8 = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int c = 0; c < 8; c++) begin
      for (int i = 0; i < M; i++) p3[i] = s[i][c];
      ctl3 = '0; ctl3.en = 1; ctl3.first = (c == 0); ctl3.last = (c == 7);
      #1 chk(cs3 == 3'(exp_cs[c]), $sformatf("example cycle sum %0d", c + 1));
      @(negedge clk);
    end
    ctl3 = '0;
    chk(valid3 == 1, "example valid");
    chk(acc3 == 24, $sformatf("example total %0d", acc3));
    chk((acc3 >> 3) == 3, "example MAC_out = 3");

    // random back-to-back passes
    prev = 0;
    for (int pass = 0; pass < 20; pass++) begin
      int density; density = $urandom % 101;
      total = 0;
      for (int c = 0; c < 256; c++) begin
        for (int i = 0; i < M; i++) p8[i] = ($urandom % 100) < density;
        ctl8 = '0; ctl8.en = 1; ctl8.first = (c == 0); ctl8.last = (c == 255);
        total += $countones(p8);
        #1;
        if (pass > 0) begin
          chk(acc8 == prev, "result holds during next pass");
          chk(valid8 == (c == 0), "valid only right after last");
        end
        @(negedge clk);
      end
      chk(acc8 == total, $sformatf("pass %0d total %0d got %0d", pass, total, acc8));
      prev = total;
    end
    ctl8 = '0;
    @(negedge clk);
    chk(valid8 == 0, "valid is a pulse");
    // all ones: maximum M*2^NBITS must not overflow
    for (int c = 0; c < 256; c++) begin
      p8 = '1; ctl8 = '0; ctl8.en = 1; ctl8.first = (c == 0); ctl8.last = (c == 255);
      @(negedge clk);
    end
    ctl8 = '0;
    chk(acc8 == M * 256, "full-scale total");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
