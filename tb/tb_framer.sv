// tb_framer: self-checking test of the frame builder.
// Sends payloads of several lengths (3, 17, 108 bytes) and checks the frame
// [length | payload | CRC-16/CCITT over length+payload], computed here bit
// by bit; checks that 2-byte and 109-byte payloads are dropped; checks the
// output takes length+3 cycles with m_ready high and holds under stalls.
module tb_framer;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic s_valid, s_ready, s_last, m_valid, m_ready, m_last, drop;
  logic [7:0] s_data, m_data;
  framer dut (.*);

  int checks = 0, failures = 0;
  int drops = 0;
  always @(posedge clk) if (drop) drops++;

  task automatic check(string what, int got, int exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  function automatic logic [15:0] crc_ref(byte unsigned b [$]);
    logic [15:0] c = 16'hFFFF;
    foreach (b[i]) begin
      c = c ^ {b[i], 8'h00};
      for (int j = 0; j < 8; j++) c = c[15] ? ((c << 1) ^ 16'h1021) : (c << 1);
    end
    return c;
  endfunction

  task automatic send(int len, bit random_ready);
    byte unsigned pl [$];
    byte unsigned exp_q [$];
    byte unsigned got [$];
    logic [15:0] c;
    int cyc = 0;
    for (int i = 0; i < len; i++) pl.push_back(8'($urandom));
    for (int i = 0; i < len; i++) begin
      s_valid = 1; s_data = pl[i]; s_last = (i == len - 1);
      @(negedge clk);
      while (!s_ready) @(negedge clk);
      @(posedge clk);
      #1;
    end
    s_valid = 0; s_last = 0;
    if (len < 3 || len > 108) begin
      repeat (3) @(posedge clk);
      #1;
      return;
    end
    exp_q.push_back(8'(len));
    foreach (pl[i]) exp_q.push_back(pl[i]);
    c = crc_ref(exp_q);
    exp_q.push_back(c[15:8]); exp_q.push_back(c[7:0]);
    while (got.size() < len + 3) begin
      m_ready = random_ready ? 1'($urandom_range(0, 1)) : 1'b1;
      #1;
      if (m_valid && m_ready) begin
        got.push_back(m_data);
        if (got.size() == len + 3) check("m_last", m_last, 1);
        else if (m_last) check("early m_last", 1, 0);
      end
      @(posedge clk); cyc++; #1;
    end
    m_ready = 1;
    foreach (exp_q[i]) check($sformatf("len %0d byte %0d", len, i), got[i], exp_q[i]);
    if (!random_ready) check($sformatf("len %0d cycles", len), cyc, len + 3);
  endtask

  initial begin
    s_valid = 0; s_last = 0; s_data = 0; m_ready = 1;
    repeat (3) @(posedge clk); rst_n = 1; #1;
    @(posedge clk); #1;
    send(3, 0);
    send(17, 0);
    send(108, 0);
    send(2, 0);
    send(109, 0);
    check("drops", drops, 2);
    send(40, 1);
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
