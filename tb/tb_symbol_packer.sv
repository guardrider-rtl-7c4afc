// tb_symbol_packer: self-checking test of the bit-to-symbol packer.
// For several codes (m,k) and frame lengths it sends bytes, rebuilds the
// expected symbol sequence from the byte bits here (MSB first, zero padded to
// a whole symbol and then to a whole number of k-symbol blocks) and compares
// it with the output, including m_last on the final symbol and m_cfg.
module tb_symbol_packer;
  import gr_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  code_cfg_t cfg, m_cfg;
  logic s_valid, s_ready, s_last, m_valid, m_ready, m_last;
  logic [7:0] s_data;
  sym_t m_data;
  symbol_packer dut (.*);

  int checks = 0, failures = 0;
  task automatic check(string what, int got, int exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  int got [$];
  bit got_last [$];
  bit collecting = 0;
  always @(posedge clk) if (collecting && m_valid && m_ready) begin
    got.push_back(int'(m_data)); got_last.push_back(m_last);
  end

  task automatic frame(int m, int k, int len);
    byte unsigned pl [$];
    bit bits [$];
    int exp_q [$];
    int nsym, v;
    for (int i = 0; i < len; i++) pl.push_back(8'($urandom));
    foreach (pl[i]) for (int b = 7; b >= 0; b--) bits.push_back(pl[i][b]);
    nsym = (bits.size() + m - 1) / m;
    nsym = ((nsym + k - 1) / k) * k;
    for (int s = 0; s < nsym; s++) begin
      v = 0;
      for (int b = 0; b < m; b++) v = (v << 1) | ((s*m + b < bits.size()) ? int'(bits[s*m + b]) : 0);
      exp_q.push_back(v);
    end
    got.delete(); got_last.delete();
    collecting = 1;
    cfg = '{m: 3'(m), k: 7'(k)};
    for (int i = 0; i < len; i++) begin
      s_valid = 1; s_data = pl[i]; s_last = (i == len - 1);
      @(negedge clk);
      while (!s_ready) @(negedge clk);
      @(posedge clk); #1;
      cfg = '{m: 3'd7, k: 7'd1};   // later changes must not affect this frame
    end
    s_valid = 0; s_last = 0;
    while (got.size() < nsym) begin
      @(posedge clk); #1;
      if (got.size() == 0 || got.size() < nsym) check("m_cfg held", int'(m_cfg), int'({3'(m), 7'(k)}));
    end
    repeat (3) @(posedge clk); #1;
    collecting = 0;
    check($sformatf("m%0d k%0d len%0d count", m, k, len), got.size(), nsym);
    foreach (exp_q[i]) begin
      check($sformatf("m%0d k%0d len%0d sym %0d", m, k, len, i), got[i], exp_q[i]);
      check($sformatf("m%0d k%0d len%0d last %0d", m, k, len, i), int'(got_last[i]), int'(i == nsym - 1));
    end
  endtask

  initial begin
    s_valid = 0; s_last = 0; s_data = 0; m_ready = 1; cfg = '{m: 3'd3, k: 7'd3};
    repeat (3) @(posedge clk); rst_n = 1; #1;
    frame(3, 3, 3);
    frame(6, 45, 20);
    frame(6, 13, 111);
    frame(4, 9, 7);
    frame(7, 1, 5);
    frame(5, 29, 4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
