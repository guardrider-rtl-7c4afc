// tb_frequency_shifter: self-checking test of the delta_f square wave.
// Checks that the output stays low while disabled and that, when enabled,
// every high and low phase lasts exactly the half period, for the default
// (2 cycles: 50 MHz at a 200 MHz clock) and for run-time values 1, 3 and 5.
module tb_frequency_shifter;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic enable, sq;
  logic [15:0] half_period;
  frequency_shifter dut (.*);

  int checks = 0, failures = 0;
  task automatic check(string what, int got, int exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  task automatic measure(int hp_in, int hp_exp);
    int len;
    bit lvl;
    half_period = 16'(hp_in);
    enable = 0;
    repeat (5) begin @(posedge clk); #1; check("low when disabled", sq, 0); end
    enable = 1;
    @(posedge clk); #1;
    while (sq == 0) begin @(posedge clk); #1; end
    // now measure 10 phases
    for (int p = 0; p < 10; p++) begin
      lvl = sq; len = 0;
      while (sq == lvl) begin len++; @(posedge clk); #1; end
      check($sformatf("hp %0d phase %0d", hp_exp, p), len, hp_exp);
    end
  endtask

  initial begin
    enable = 0; half_period = 0;
    repeat (3) @(posedge clk); rst_n = 1; #1;
    measure(0, 2);
    measure(1, 1);
    measure(3, 3);
    measure(5, 5);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (3000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
