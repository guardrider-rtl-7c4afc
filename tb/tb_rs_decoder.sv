// tb_rs_decoder: self-checking test of the RS decoder.
// 1. RS(7,3) example: received {1,5,4,1,3,4,2} (two symbols hit by a burst)
//    must decode to the data {1,5,7}.
// 2. Random codewords of several codes, made here by a reference encoder
//    built on log/antilog tables, with 0..t random symbol errors, often as a
//    contiguous burst: the data must come back exactly, m_fail low and
//    m_nerr equal to the number of errors.
// 3. Codewords with t+1.. errors in a short code are either flagged or, if
//    not flagged, differ from the sent data (miscorrection); both are counted.
// 4. Latency: 2n + 2(n-k) + k + 1 cycles from the first symbol in to the
//    last symbol out when the code does not change and symbols come back to
//    back. In one trial per code the symbols come as one-cycle strobes with
//    gaps (as in the receiver) and each must be taken when offered.
module tb_rs_decoder;
  import gr_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  code_cfg_t cfg;
  logic flush, s_valid, s_ready, m_valid, m_ready, m_last, m_fail, busy;
  sym_t s_data, m_data;
  logic [6:0] m_nerr;
  rs_decoder dut (.*);

  int checks = 0, failures = 0;
  task automatic check(string what, int got, int exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

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

  int cw [$];
  int data_q [$];
  function automatic void ref_encode(int m, int k);
    int n = (1 << m) - 1;
    int npar = n - k;
    int g [128];
    int rem [128];
    int fbk;
    build_tables(m);
    for (int j = 0; j < 128; j++) begin g[j] = 0; rem[j] = 0; end
    g[0] = 1;
    for (int i = 1; i <= npar; i++) begin
      for (int j = i; j >= 1; j--) g[j] = g[j-1] ^ rmul(g[j], expt[i % n], m);
      g[0] = rmul(g[0], expt[i % n], m);
    end
    for (int i = 0; i < k; i++) begin
      fbk = data_q[i] ^ rem[npar-1];
      for (int j = npar - 1; j >= 1; j--) rem[j] = rem[j-1] ^ rmul(fbk, g[j], m);
      rem[0] = rmul(fbk, g[0], m);
    end
    cw = data_q;
    for (int i = 0; i < npar; i++) cw.push_back(rem[npar-1-i]);
  endfunction

  int got [$];
  bit got_fail;
  int got_nerr;
  int latency;
  bit pulse_mode = 0;
  task automatic decode(int m, int k, int rx [$]);
    int n = (1 << m) - 1;
    int t0;
    got.delete();
    cfg = '{m: 3'(m), k: 7'(k)};
    t0 = 0;
    if (pulse_mode) begin
      // one-cycle symbol strobes with gaps, as from the receive chain:
      // each must be taken when offered
      while (!s_ready) @(posedge clk);
      #1;
      for (int i = 0; i < n; i++) begin
        s_valid = 1; s_data = sym_t'(rx[i]);
        #1;
        check("symbol taken when offered", int'(s_ready), 1);
        @(posedge clk); #1;
        s_valid = 0;
        repeat (2) @(posedge clk);
        #1;
      end
      t0 = 0;
    end else
    for (int i = 0; i < n; i++) begin
      s_valid = 1; s_data = sym_t'(rx[i]);
      @(negedge clk);
      while (!s_ready) begin @(negedge clk); t0 = 0; end
      @(posedge clk); #1;
      t0++;
    end
    s_valid = 0;
    while (got.size() < k) begin
      #1;
      if (m_valid && m_ready) begin
        got.push_back(int'(m_data));
        got_fail = m_fail; got_nerr = int'(m_nerr);
        if (got.size() == k) check("m_last", m_last, 1);
      end
      @(posedge clk); #1; t0++;
    end
    latency = t0;
  endtask

  initial begin
    int rx [$];
    int nerr, pos, n, m, k, flagged, miscorr;
    automatic int codes [][2] = '{'{3,3}, '{4,9}, '{5,21}, '{6,45}, '{6,29}, '{6,13}, '{7,99}, '{7,1}};
    s_valid = 0; s_data = 0; m_ready = 1; flush = 0; cfg = '{m: 3'd3, k: 7'd3};
    repeat (3) @(posedge clk); rst_n = 1; #1;
    decode(3, 3, '{1, 5, 4, 1, 3, 4, 2});
    check("example d0", got[0], 1); check("example d1", got[1], 5); check("example d2", got[2], 7);
    check("example fail", got_fail, 0); check("example nerr", got_nerr, 2);
    foreach (codes[c]) begin
      m = codes[c][0]; k = codes[c][1]; n = (1 << m) - 1;
      for (int trial = 0; trial < 4; trial++) begin
        data_q.delete();
        for (int i = 0; i < k; i++) data_q.push_back($urandom_range(0, n));
        ref_encode(m, k);
        rx = cw;
        nerr = (trial == 0) ? (n - k) / 2 : $urandom_range(0, (n - k) / 2);
        if (trial[0]) begin
          // contiguous burst
          pos = $urandom_range(0, n - nerr);
          for (int e = 0; e < nerr; e++) rx[pos + e] ^= $urandom_range(1, n);
        end else begin
          automatic int placed = 0;
          while (placed < nerr) begin
            pos = $urandom_range(0, n - 1);
            if (rx[pos] == cw[pos]) begin rx[pos] ^= $urandom_range(1, n); placed++; end
          end
        end
        pulse_mode = (trial == 3);
        decode(m, k, rx);
        pulse_mode = 0;
        for (int i = 0; i < k; i++) check($sformatf("RS(%0d,%0d) t%0d d%0d", n, k, trial, i), got[i], data_q[i]);
        check($sformatf("RS(%0d,%0d) fail", n, k), got_fail, 0);
        check($sformatf("RS(%0d,%0d) nerr", n, k), got_nerr, nerr);
        if (trial == 1 || trial == 2) check($sformatf("RS(%0d,%0d) latency", n, k), latency, 2*n + 2*(n-k) + k + 1);
      end
    end
    // Beyond t: RS(15,9), t = 3, put 5 errors
    flagged = 0; miscorr = 0;
    for (int trial = 0; trial < 6; trial++) begin
      bit same;
      data_q.delete();
      for (int i = 0; i < 9; i++) data_q.push_back($urandom_range(0, 15));
      ref_encode(4, 9);
      rx = cw;
      for (int e = 0; e < 5; e++) rx[e * 3] ^= $urandom_range(1, 15);
      decode(4, 9, rx);
      same = 1;
      for (int i = 0; i < 9; i++) if (got[i] != data_q[i]) same = 0;
      if (got_fail) flagged++;
      else if (!same) miscorr++;
      checks++;
      if (!got_fail && same) begin failures++; $display("FAIL 5 errors decoded as correct"); end
    end
    $display("beyond t: %0d flagged, %0d miscorrected", flagged, miscorr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (60000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
