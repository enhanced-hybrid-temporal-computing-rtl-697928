// tb_up_counter -- self-checking test of the shared up-counter: counting with en,
// holding without en, synchronous clear, and wrap-around after 2^NBITS counts.
module tb_up_counter;
  localparam int unsigned NBITS = 8;
  logic clk = 0, rst_n = 0, clr = 0, en = 0;
  logic [NBITS-1:0] count;
  int checks = 0, failures = 0;
  int unsigned model = 0;

  up_counter #(.NBITS(NBITS)) dut (.clk, .rst_n, .clr, .en, .count);

  always #5 clk = ~clk;

  task automatic check(string what);
    checks++;
    if (count !== NBITS'(model)) begin
      failures++;
      $display("FAIL %s: count=%0d expected %0d", what, count, model);
    end
  endtask

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); check("reset");
    for (int i = 0; i < 2000; i++) begin
      en  = ($urandom % 4) != 0;
      clr = ($urandom % 97) == 0;
      @(posedge clk);
      if (clr) model = 0; else if (en) model = (model + 1) % (1 << NBITS);
      @(negedge clk); check("step");
    end
    // a full wrap: 256 enabled cycles return to the same value
    clr = 0; en = 1;
    repeat (1 << NBITS) @(posedge clk);
    @(negedge clk); check("wrap");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
