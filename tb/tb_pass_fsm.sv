// tb_pass_fsm -- self-checking test of the pass controller, driven with a counter
// model in the testbench. Checks that a pass lasts exactly 2^NBITS cycles, that
// first/last mark counts 0 and 2^NBITS-1, that done follows the last cycle by one
// cycle, that load/clr accompany an accepted start, that a start held through the
// last cycle runs the next pass with no gap, and that the controller returns to
// idle otherwise.
module tb_pass_fsm;
  import ehtc_pkg::*;
  localparam int unsigned NBITS = 8;
  localparam int unsigned LEN = 1 << NBITS;
  logic clk = 0, rst_n = 0, start = 0;
  logic [NBITS-1:0] count = '0;
  pass_t ctl;
  logic busy, done;
  int checks = 0, failures = 0;

  pass_fsm #(.NBITS(NBITS)) dut (.clk, .rst_n, .start, .count, .ctl, .busy, .done);

  always #5 clk = ~clk;
  // counter model
  always_ff @(posedge clk) if (ctl.clr) count <= '0; else if (ctl.en) count <= count + 1'b1;

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Run one pass starting now (start is high in the current cycle); returns the
  // number of busy cycles seen until done.
  task automatic one_pass(bit keep_start, output int cycles);
    int firsts = 0, lasts = 0;
    cycles = 0;
    chk(ctl.load == 1, "load with start");
    @(posedge clk); #1;
    if (!keep_start) start = 0;
    while (!done) begin
      chk(busy == 1, "busy during pass");
      chk(ctl.en == 1, "en during pass");
      chk(ctl.first == (count == 0), "first at count 0");
      chk(ctl.last == (count == NBITS'(LEN - 1)), "last at count max");
      chk(ctl.load == (ctl.last && start), "load only with start on the last cycle");
      chk(ctl.clr == 0, "no clr while running");
      firsts += ctl.first; lasts += ctl.last;
      @(posedge clk); #1;
      cycles++;
      if (cycles > 3 * LEN) break;
    end
    chk(firsts == 1 && lasts == 1, "one first and one last per pass");
  endtask

  initial begin
    int cyc;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(busy == 0 && done == 0 && ctl.en == 0, "idle after reset");
    // single pass
    start = 1;
    #1;
    chk(ctl.clr == 1, "clr with start from idle");
    one_pass(0, cyc);
    chk(cyc == LEN, $sformatf("pass length %0d", cyc));
    chk(busy == 0, "back to idle");
    repeat (5) begin @(negedge clk); chk(busy == 0 && ctl.en == 0, "stays idle"); end
    // two passes back to back: start held high
    start = 1;
    #1;
    one_pass(1, cyc);
    chk(cyc == LEN, "first of two back-to-back");
    chk(busy == 1, "no gap between back-to-back passes");
    chk(ctl.first == 1 && count == 0, "second pass starts at count 0");
    start = 0;
    cyc = 0;
    do begin @(posedge clk); #1; cyc++; end while (!done && cyc < 3 * LEN);
    chk(cyc == LEN, $sformatf("second pass length %0d", cyc));
    chk(busy == 0, "idle after second pass");
    @(posedge clk); #1;
    chk(busy == 0 && done == 0, "done is a one-cycle pulse");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
