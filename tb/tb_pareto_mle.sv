// tb_pareto_mle: feeds integer durations drawn from Pareto distributions
// (inverse-CDF sampling, x = x_m * u^(-1/lambda)) and compares the block's
// count, minimum, shape lambda and mean with the maximum-likelihood values
// computed here in floating point from the same samples (tolerance 1%).
// Also checks that lambda <= 1 is reported with mean_ok low, and clear.
module tb_pareto_mle;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear, s_valid, s_ready, finish, done, mean_ok;
  logic [23:0] s_dur, dmin, lambda;
  logic [15:0] count;
  logic [31:0] mean;
  pareto_mle dut (.*);

  int checks = 0, failures = 0;
  task automatic check(string what, int got, int exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask
  task automatic check_rel(string what, real got, real exp, real tol);
    checks++;
    if ((got - exp) > tol * exp || (exp - got) > tol * exp) begin
      failures++; $display("FAIL %s: got %f expected %f", what, got, exp);
    end
  endtask

  task automatic run(int xm, real lam, int nsamp);
    int xs [$];
    real u, sl, lh, mh;
    int mn;
    clear = 1; @(posedge clk); #1; clear = 0;
    mn = 32'h7fffffff; sl = 0;
    for (int i = 0; i < nsamp; i++) begin
      u = (real'($urandom_range(1, 1000000))) / 1000000.0;
      xs.push_back(int'($floor(real'(xm) * $pow(u, -1.0 / lam))));
      if (xs[i] > 16000000) xs[i] = 16000000;
      if (xs[i] < mn) mn = xs[i];
      sl += $ln(real'(xs[i]));
    end
    foreach (xs[i]) begin
      s_valid = 1; s_dur = 24'(xs[i]);
      @(negedge clk);
      while (!s_ready) @(negedge clk);
      @(posedge clk); #1;
      s_valid = 0;
    end
    @(posedge clk); #1;
    finish = 1; @(posedge clk); #1; finish = 0;
    while (!done) begin @(posedge clk); #1; end
    lh = real'(nsamp) / (sl - nsamp * $ln(real'(mn)));
    check($sformatf("count (xm %0d, lam %f)", xm, lam), int'(count), nsamp);
    check($sformatf("min (xm %0d, lam %f)", xm, lam), int'(dmin), mn);
    check_rel($sformatf("lambda (xm %0d, lam %f)", xm, lam), real'(lambda) / 65536.0, lh, 0.01);
    if (lh > 1.05) begin
      mh = lh * mn / (lh - 1.0);
      check($sformatf("mean_ok (xm %0d)", xm), int'(mean_ok), 1);
      check_rel($sformatf("mean (xm %0d, lam %f)", xm, lam), real'(mean) / 256.0, mh, 0.01);
    end else if (lh < 0.95) begin
      check($sformatf("mean_ok low (lam %f)", lh), int'(mean_ok), 0);
    end
  endtask

  initial begin
    clear = 0; s_valid = 0; s_dur = 0; finish = 0;
    repeat (3) @(posedge clk); rst_n = 1; #1;
    run(80, 2.5, 200);      // off periods: min 16 us at 5 MHz
    run(100, 1.6, 300);
    run(5, 3.0, 100);
    run(1000, 0.7, 100);    // heavy tail, no finite mean
    run(50, 6.0, 50);
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
