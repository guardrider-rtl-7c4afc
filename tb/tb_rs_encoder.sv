// tb_rs_encoder: self-checking test of the systematic RS encoder.
//
// 1. RS(7,3), data {1,5,7}: expects parity {6,3,4,2} (the worked example).
// 2. Random codewords for several codes, including a code change in the
//    middle of the run and the largest code RS(127,1): every output codeword
//    is checked against a reference encoder built here from log/antilog
//    tables (long division by the generator), and the codeword is checked to
//    have zero syndromes at alpha^1..alpha^(n-k).
// 3. Cycle count: with m_ready high a codeword takes n cycles, plus n-k cycles
//    when the generator is rebuilt.
module tb_rs_encoder;
  import gr_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  code_cfg_t s_cfg;
  logic s_valid, s_ready, s_last, m_valid, m_ready, m_first, m_last, busy_build;
  sym_t s_data, m_data;
  logic [2:0] m_sym_m;

  rs_encoder dut (.*);

  int checks = 0, failures = 0;

  // ---------------- reference GF tables ----------------
  int expt [256];
  int logt [256];
  function automatic void build_tables(int m);
    int x = 1;
    int poly = int'(prim_poly(3'(m)));
    for (int i = 0; i < (1 << m) - 1; i++) begin
      expt[i] = x; logt[x] = i;
      x = x << 1;
      if (x & (1 << m)) x = x ^ poly;
    end
  endfunction
  function automatic int rmul(int a, int b, int m);
    if (a == 0 || b == 0) return 0;
    return expt[(logt[a] + logt[b]) % ((1 << m) - 1)];
  endfunction

  int data_q [$];
  int out_q  [$];

  task automatic check(string what, int got, int exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // Send one codeword's data, collect n output symbols, return cycles used.
  task automatic run_cw(int m, int k, bit last, output int cycles);
    int n = (1 << m) - 1;
    int sent = 0;
    int t0;
    out_q.delete();
    s_cfg   = '{m: 3'(m), k: 7'(k)};
    t0 = 0;
    while (out_q.size() < n) begin
      s_valid = (sent < k);
      s_data  = (sent < k) ? sym_t'(data_q[sent]) : '0;
      s_last  = last && (sent == k - 1);
      @(posedge clk);
      t0++;
      if (s_valid && s_ready) sent++;
      if (m_valid && m_ready) begin
        out_q.push_back(int'(m_data));
        if (out_q.size() == 1) begin checks++; if (!m_first) begin failures++; $display("FAIL m_first"); end end
        if (out_q.size() == n) begin checks++; if (m_last !== last) begin failures++; $display("FAIL m_last"); end end
      end
      #1;
    end
    s_valid = 0;
    cycles = t0;
  endtask

  task automatic verify(int m, int k);
    int n = (1 << m) - 1;
    int npar = n - k;
    int g [128];
    int rem [128];
    int r, fbk, s, x;
    build_tables(m);
    // generator, g[j] coefficient of x^j
    for (int j = 0; j < 128; j++) g[j] = 0;
    g[0] = 1;
    for (int i = 1; i <= npar; i++) begin
      r = expt[i % n];
      for (int j = i; j >= 1; j--) g[j] = g[j-1] ^ rmul(g[j], r, m);
      g[0] = rmul(g[0], r, m);
    end
    for (int j = 0; j < 128; j++) rem[j] = 0;
    for (int i = 0; i < k; i++) begin
      fbk = data_q[i] ^ rem[npar-1];
      for (int j = npar - 1; j >= 1; j--) rem[j] = rem[j-1] ^ rmul(fbk, g[j], m);
      rem[0] = rmul(fbk, g[0], m);
    end
    for (int i = 0; i < k; i++)    check($sformatf("RS(%0d,%0d) data %0d", n, k, i), out_q[i], data_q[i]);
    for (int i = 0; i < npar; i++) check($sformatf("RS(%0d,%0d) parity %0d", n, k, i), out_q[k+i], rem[npar-1-i]);
    // syndromes of the received codeword must be zero
    for (int j = 1; j <= npar; j++) begin
      s = 0;
      x = expt[j % n];
      for (int i = 0; i < n; i++) s = rmul(s, x, m) ^ out_q[i];
      if (j == 1 || j == npar) check($sformatf("RS(%0d,%0d) syndrome %0d", n, k, j), s, 0);
    end
  endtask

  initial begin
    int cyc;
    automatic int codes [][2] = '{'{3,3}, '{4,9}, '{4,9}, '{6,45}, '{6,29}, '{6,13}, '{5,21}, '{7,1}, '{7,119}, '{3,1}};
    s_valid = 0; s_last = 0; s_data = '0; m_ready = 1; s_cfg = '{m: 3'd3, k: 7'd3};
    repeat (3) @(posedge clk);
    rst_n = 1;
    #1;
    // Worked example
    data_q = '{1, 5, 7};
    run_cw(3, 3, 1'b1, cyc);
    check("RS(7,3) example p0", out_q[3], 6);
    check("RS(7,3) example p1", out_q[4], 3);
    check("RS(7,3) example p2", out_q[5], 4);
    check("RS(7,3) example p3", out_q[6], 2);
    verify(3, 3);
    for (int c = 1; c < codes.size(); c++) begin
      automatic int m = codes[c][0];
      automatic int k = codes[c][1];
      automatic int n = (1 << m) - 1;
      automatic bit rebuilt = (codes[c] != codes[c-1]);
      data_q.delete();
      for (int i = 0; i < k; i++) data_q.push_back($urandom_range(0, n));
      run_cw(m, k, c[0], cyc);
      verify(m, k);
      // one cycle of IDLE, the rebuild, then n output cycles
      check($sformatf("RS(%0d,%0d) cycles", n, k), cyc, 1 + n + (rebuilt ? n - k : 0));
    end
    // Back-pressure: random m_ready, same check of contents
    fork
      begin
        data_q.delete();
        for (int i = 0; i < 29; i++) data_q.push_back($urandom_range(0, 63));
        run_cw(6, 29, 1'b0, cyc);
        verify(6, 29);
      end
      begin
        while (out_q.size() < 63) begin
          @(negedge clk);
          m_ready = $urandom_range(0, 1);
        end
        m_ready = 1;
      end
    join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
