// tb_matched_filter: compares the sliding sum of the last SPB power samples
// with a reference sum kept here, for random samples with gaps in s_valid.
module tb_matched_filter;
  localparam int SPB = 10;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic s_valid, m_valid;
  logic [15:0] s_power;
  logic [19:0] m_y;
  matched_filter #(.SPB(SPB)) dut (.*);

  int checks = 0, failures = 0;
  int hist [$];
  initial begin
    int e;
    s_valid = 0; s_power = 0;
    repeat (3) @(posedge clk); rst_n = 1; #1;
    for (int t = 0; t < 300; t++) begin
      s_valid = 1; s_power = 16'($urandom);
      hist.push_front(int'(s_power));
      @(posedge clk); #1;
      s_valid = 0;
      e = 0;
      for (int j = 0; j < SPB && j < hist.size(); j++) e += hist[j];
      checks++;
      if (!m_valid || int'(m_y) != e) begin failures++; $display("FAIL t=%0d y=%0d exp=%0d", t, m_y, e); end
      if (t % 7 == 3) begin @(posedge clk); #1; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
