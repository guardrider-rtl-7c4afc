// tb_tx_serializer: self-checking test of the preamble + NRZ serializer.
// Sends frames of m-bit symbols and checks the bit stream: the 36 preamble
// bits 1010...10 1101 0010 0011 (written out here independently), then every
// symbol MSB first, m_last on the final bit and m_preamble on the first 36.
// The output side pulls bits with a random m_ready.
module tb_tx_serializer;
  import gr_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic s_valid, s_ready, s_last, m_valid, m_ready, m_bit, m_last, m_preamble;
  sym_t s_data;
  logic [2:0] s_m;
  tx_serializer dut (.*);

  int checks = 0, failures = 0;
  task automatic check(string what, int got, int exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  string pre_str = "101010101010101010101010110100100011";
  int syms [$];
  int sidx;
  bit got_bits [$];
  bit got_pre  [$];
  bit got_last [$];

  // symbol source
  always @(posedge clk) if (s_valid && s_ready) sidx <= sidx + 1;
  assign s_valid = (sidx < syms.size());
  assign s_data  = s_valid ? sym_t'(syms[sidx]) : '0;
  assign s_last  = (sidx == syms.size() - 1);

  always @(posedge clk) if (m_valid && m_ready) begin
    got_bits.push_back(m_bit); got_pre.push_back(m_preamble); got_last.push_back(m_last);
  end
  always @(negedge clk) m_ready <= 1'($urandom_range(0, 1));

  task automatic frame(int m, int nsym);
    bit exp_b [$];
    int exp_len;
    got_bits.delete(); got_pre.delete(); got_last.delete();
    s_m = 3'(m);
    for (int i = 0; i < 36; i++) exp_b.push_back(pre_str[i] == "1");
    syms.delete();
    for (int i = 0; i < nsym; i++) begin
      syms.push_back($urandom_range(0, (1 << m) - 1));
      for (int b = m - 1; b >= 0; b--) exp_b.push_back(syms[i][b]);
    end
    sidx = 0;
    exp_len = exp_b.size();
    while (got_bits.size() < exp_len) @(posedge clk);
    repeat (10) @(posedge clk);
    check($sformatf("m%0d bit count", m), got_bits.size(), exp_len);
    foreach (exp_b[i]) begin
      check($sformatf("m%0d bit %0d", m, i), got_bits[i], exp_b[i]);
      check($sformatf("m%0d pre %0d", m, i), got_pre[i], i < 36);
      check($sformatf("m%0d last %0d", m, i), got_last[i], i == exp_len - 1);
    end
    syms.delete(); sidx = 0;
  endtask

  initial begin
    sidx = 0; s_m = 3'd3;
    repeat (3) @(posedge clk); rst_n = 1;
    frame(3, 7);
    frame(6, 63);
    frame(7, 20);
    frame(4, 30);
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
