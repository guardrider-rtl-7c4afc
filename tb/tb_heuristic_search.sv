// tb_heuristic_search: for a set of symbol loss probabilities p_s and block
// error thresholds, the chosen code is compared with a floating-point search
// over the same domain (n = 7..127, k = n - 2t, binomial tail of the number
// of lost symbols). Where the reference result changes within +-1% of the
// threshold (a fixed-point near-tie), either neighbouring answer is accepted.
module tb_heuristic_search;
  import gr_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, done, found;
  logic [31:0] p_s, pe_th;
  code_cfg_t code;
  heuristic_search dut (.*);

  int checks = 0, failures = 0;
  localparam real Q30 = 1073741824.0;

  // Reference search: returns {found, m, k}.
  function automatic int ref_search(real p, real th);
    real pmf [128];
    real tail;
    int bm = 7, bk = 1, bf = 0, n, tbest;
    for (int m = 3; m <= 7; m++) begin
      n = (1 << m) - 1;
      if (p >= 1.0) begin
        for (int i = 0; i <= n; i++) pmf[i] = (i == n) ? 1.0 : 0.0;
      end else begin
        pmf[0] = $pow(1.0 - p, n);
        for (int i = 1; i <= n; i++) pmf[i] = pmf[i-1] * real'(n - i + 1) / real'(i) * p / (1.0 - p);
      end
      tail = 0.0; tbest = -1;
      for (int t = n - 1; t >= 1; t--) begin
        tail += pmf[t + 1];
        if (t <= (n - 1) / 2 && tail <= th) tbest = t;
      end
      if (tbest > 0) begin
        if (!bf || (n - 2 * tbest) * ((1 << bm) - 1) > bk * n) begin
          bm = m; bk = n - 2 * tbest; bf = 1;
        end
      end
    end
    return (bf << 16) | (bm << 8) | bk;
  endfunction

  task automatic run(real p, real th);
    int r0, r1, got, cyc;
    p_s = 32'(longint'(p * Q30)); pe_th = 32'(longint'(th * Q30));
    start = 1; @(posedge clk); #1; start = 0;
    cyc = 0;
    while (!done) begin @(posedge clk); #1; cyc++; end
    got = (int'(found) << 16) | (int'(code.m) << 8) | int'(code.k);
    r0 = ref_search(p, th * 0.99);
    r1 = ref_search(p, th * 1.01);
    checks++;
    if (got != r0 && got != r1) begin
      failures++;
      $display("FAIL p=%f th=%g: got found=%0d RS(%0d,%0d) expected found=%0d RS(%0d,%0d)",
               p, th, found, (1 << code.m) - 1, code.k, r0 >> 16, (1 << ((r0 >> 8) & 7)) - 1, r0 & 255);
    end
    checks++;
    if (cyc > 12000) begin failures++; $display("FAIL latency %0d", cyc); end
  endtask

  initial begin
    real ps [] = '{0.0, 0.001, 0.005, 0.01, 0.02, 0.035, 0.05, 0.08, 0.1, 0.15, 0.2, 0.3, 0.4, 0.6, 1.0};
    start = 0; p_s = 0; pe_th = 0;
    repeat (3) @(posedge clk); rst_n = 1; #1;
    foreach (ps[j]) run(ps[j], 1e-3);
    run(0.05, 1e-2);
    run(0.05, 1e-5);
    for (int j = 0; j < 10; j++)
      run(real'($urandom_range(1, 250000)) / 1000000.0, real'($urandom_range(1, 1000)) * 1e-5);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
