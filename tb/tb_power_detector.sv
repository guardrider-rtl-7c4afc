// tb_power_detector: checks P = floor(sqrt(I^2 + Q^2)) against a real-valued
// square root for corner values (0, full scale, negative) and random samples,
// and the one-cycle latency.
module tb_power_detector;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic s_valid, m_valid;
  logic signed [15:0] s_i, s_q;
  logic [15:0] m_power;
  power_detector dut (.*);

  int checks = 0, failures = 0;
  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  task automatic one(int i, int q);
    longint e;
    longint r;
    s_valid = 1; s_i = 16'(i); s_q = 16'(q);
    @(posedge clk); #1;
    s_valid = 0;
    e = longint'(i) * i + longint'(q) * q;
    r = longint'($floor($sqrt(real'(e))));
    if (r * r > e) r--;
    if ((r + 1) * (r + 1) <= e) r++;
    if (r > 65535) r = 65535;
    check($sformatf("valid (%0d,%0d)", i, q), m_valid, 1);
    check($sformatf("P(%0d,%0d)", i, q), m_power, r);
    @(posedge clk); #1;
    check("valid drops", m_valid, 0);
  endtask

  initial begin
    s_valid = 0; s_i = 0; s_q = 0;
    repeat (3) @(posedge clk); rst_n = 1; #1;
    one(0, 0); one(3, 4); one(-3, -4); one(32767, 0); one(-32768, 0);
    one(1000, -1000); one(-20000, 15000);
    for (int t = 0; t < 200; t++) one($urandom_range(0, 65535) - 32768, $urandom_range(0, 65535) - 32768);
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
