// tb_gb2tb -- self-checking test of the general-to-temporal bitstream converter.
// Random general bitstreams are fed pass after pass (back to back); during each
// following pass the output must be 1 for exactly as many leading cycles as the
// previous pass had ones, and 0 afterwards. Includes all-zero and all-one passes.
module tb_gb2tb;
  import ehtc_pkg::*;
  localparam int unsigned NBITS = 8;
  localparam int unsigned L = 1 << NBITS;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic gb, tb; pass_t ctl;

  gb2tb #(.NBITS(NBITS)) dut (.clk, .rst_n, .gb, .ctl, .tb);

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
    int prev_ones, ones, dens;
    gb = 0; ctl = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    prev_ones = -1;
    for (int pass = 0; pass < 25; pass++) begin
      dens = (pass == 3) ? 0 : (pass == 4) ? 100 : $urandom % 101;
      ones = 0;
      for (int c = 0; c < L; c++) begin
        gb = ($urandom % 100) < dens;
        ones += gb;
        ctl = '0; ctl.en = 1; ctl.first = (c == 0); ctl.last = (c == L - 1);
        #1;
        if (prev_ones >= 0)
          chk(tb == (c < prev_ones), $sformatf("pass %0d cycle %0d tb for %0d ones", pass, c, prev_ones));
        @(negedge clk);
      end
      prev_ones = ones;
    end
    // idle: output holds its first bit
    ctl = '0;
    repeat (3) begin @(negedge clk); chk(tb == (prev_ones > 0), "holds while idle"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
