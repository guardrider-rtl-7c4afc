// tb_onoff_measure: drives a power sequence of known on/off runs (random
// lengths, powers above/below the threshold, samples with gaps in s_valid)
// and checks that every completed run after the first is reported with the
// right state and length, and that disabling restarts the measurement.
module tb_onoff_measure;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic enable, s_valid, m_valid, m_on;
  logic [15:0] on_thresh, s_power;
  logic [23:0] m_dur;
  onoff_measure dut (.*);

  int checks = 0, failures = 0;
  task automatic check(string what, int got, int exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  int got_on [$];
  int got_dur [$];
  always @(posedge clk) if (m_valid) begin got_on.push_back(m_on); got_dur.push_back(int'(m_dur)); end

  task automatic sample(bit on);
    s_valid = 1;
    s_power = on ? 16'($urandom_range(1000, 40000)) : 16'($urandom_range(0, 999));
    @(posedge clk); #1;
    s_valid = 0;
    if ($urandom_range(0, 3) == 0) begin @(posedge clk); #1; end
  endtask

  initial begin
    int lens [$];
    bit st;
    enable = 0; s_valid = 0; s_power = 0; on_thresh = 16'd1000;
    repeat (3) @(posedge clk); rst_n = 1; #1;
    for (int pass = 0; pass < 2; pass++) begin
      enable = 1;
      lens.delete(); got_on.delete(); got_dur.delete();
      st = pass[0];
      for (int r = 0; r < 30; r++) begin
        lens.push_back($urandom_range(1, 40));
        for (int j = 0; j < lens[r]; j++) sample(st);
        st = !st;
      end
      repeat (3) @(posedge clk); #1;
      // runs 1..28 are complete (run 0 start unseen, run 29 not ended)
      check("run count", got_on.size(), 28);
      for (int r = 1; r < 29; r++) begin
        check($sformatf("pass %0d run %0d state", pass, r), got_on[r-1], int'(pass[0] ^ r[0]));
        check($sformatf("pass %0d run %0d length", pass, r), got_dur[r-1], lens[r]);
      end
      enable = 0;
      @(posedge clk); #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
