// tb_markov_params: random mean on/off durations (Q.8) and link rates
// (Q16.16); alpha = R/mean_on, beta = R/mean_off and p_s = alpha/(alpha+beta)
// are compared with floating-point values (Q2.30 outputs, clamped to 1).
module tb_markov_params;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, done;
  logic [31:0] mean_on, mean_off, rate, alpha, beta, p_s;
  markov_params dut (.*);

  int checks = 0, failures = 0;
  localparam real Q30 = 1073741824.0;
  task automatic check_abs(string what, real got, real exp, real tol);
    checks++;
    if ((got - exp) > tol || (exp - got) > tol) begin
      failures++; $display("FAIL %s: got %.9f expected %.9f", what, got, exp);
    end
  endtask

  task automatic run(int unsigned mon, int unsigned moff, int unsigned r);
    real a, b, ps, ra, rb;
    int cyc;
    mean_on = mon; mean_off = moff; rate = r;
    start = 1; @(posedge clk); #1; start = 0;
    cyc = 0;
    while (!done) begin @(posedge clk); #1; cyc++; end
    a = (real'(r) / 65536.0) / (real'(mon) / 256.0); if (a > 1.0) a = 1.0;
    b = (real'(r) / 65536.0) / (real'(moff) / 256.0); if (b > 1.0) b = 1.0;
    // p_s from the quantised alpha and beta, as the block computes it
    ra = real'(alpha) / Q30; rb = real'(beta) / Q30;
    ps = ra / (ra + rb);
    check_abs($sformatf("alpha on=%0d r=%0d", mon, r), ra, a, 2.0 / Q30 + a * 1e-9);
    check_abs($sformatf("beta off=%0d r=%0d", moff, r), rb, b, 2.0 / Q30 + b * 1e-9);
    check_abs($sformatf("p_s on=%0d off=%0d", mon, moff), real'(p_s) / Q30, ps, 2.0 / Q30);
    checks++;
    if (cyc > 300) begin failures++; $display("FAIL latency %0d cycles", cyc); end
  endtask

  initial begin
    start = 0; mean_on = 0; mean_off = 0; rate = 0;
    repeat (3) @(posedge clk); rst_n = 1; #1;
    // on 2.7 ms, off 100 us at 5 MHz samples, R = 0.1 symbol per sample
    run(13500 * 256, 500 * 256, 6554);
    run(256, 256, 65536);                 // alpha = beta = 1
    run(100, 5000, 65536 * 3);            // clamped alpha
    for (int i = 0; i < 40; i++)
      run($urandom_range(256, 32'h0100_0000), $urandom_range(256, 32'h0100_0000),
          $urandom_range(1, 65536 * 4));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
