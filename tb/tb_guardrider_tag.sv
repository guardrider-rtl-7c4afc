// tb_guardrider_tag: the whole transmit chain of the tag with a short bit
// period (UPSAMPLE = 8). Random payloads are sent with several codes; the
// bit stream handed to the upsampler is compared with a reference built here
// (length byte, payload, CRC-16, MSB-first m-bit symbols padded to whole
// codewords, RS parity, 36-bit preamble). Also checked: the air time of each
// frame, that the switch is driven only during '1' bits and toggles at the
// delta_f square wave, the generator rebuild on a code change and the drop
// of a too-short payload.
module tb_guardrider_tag;
  import gr_pkg::*;
  localparam int UPS = 8;
  localparam int HP  = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  code_cfg_t code_cfg;
  logic [15:0] shift_half_period;
  logic s_valid, s_ready, s_last;
  logic [7:0] s_data;
  logic switch_ctrl, tx_on, tx_bit, frame_drop, gen_rebuild, tx_preamble, tx_frame_end;
  guardrider_tag #(.UPSAMPLE(UPS), .HALF_PERIOD(HP)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(string what, int got, int exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  // ---------------- reference model ----------------
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
  function automatic logic [15:0] crc_ref(byte unsigned b [$]);
    logic [15:0] c = 16'hFFFF;
    foreach (b[i]) begin
      c = c ^ {b[i], 8'h00};
      for (int j = 0; j < 8; j++) c = c[15] ? ((c << 1) ^ 16'h1021) : (c << 1);
    end
    return c;
  endfunction

  bit ref_bits [$];
  function automatic void ref_frame(byte unsigned pay [$], int m, int k);
    byte unsigned fr [$];
    bit bs [$];
    int syms [$];
    int n = (1 << m) - 1, npar = n - k;
    int g [128];
    int rem [128];
    int fbk, v;
    logic [15:0] c;
    fr.push_back(8'(pay.size()));
    foreach (pay[i]) fr.push_back(pay[i]);
    c = crc_ref(fr);
    fr.push_back(c[15:8]); fr.push_back(c[7:0]);
    foreach (fr[i]) for (int b = 7; b >= 0; b--) bs.push_back(fr[i][b]);
    while (bs.size() % m != 0) bs.push_back(0);
    for (int i = 0; i < bs.size(); i += m) begin
      v = 0;
      for (int b = 0; b < m; b++) v = (v << 1) | bs[i + b];
      syms.push_back(v);
    end
    while (syms.size() % k != 0) syms.push_back(0);
    build_tables(m);
    for (int j = 0; j < 128; j++) g[j] = 0;
    g[0] = 1;
    for (int i = 1; i <= npar; i++) begin
      for (int j = i; j >= 1; j--) g[j] = g[j-1] ^ rmul(g[j], expt[i % n], m);
      g[0] = rmul(g[0], expt[i % n], m);
    end
    ref_bits.delete();
    for (int b = PREAMBLE_LEN - 1; b >= 0; b--) ref_bits.push_back(PREAMBLE[b]);
    for (int c0 = 0; c0 < syms.size(); c0 += k) begin
      int cw [$];
      for (int j = 0; j < 128; j++) rem[j] = 0;
      for (int i = 0; i < k; i++) begin
        cw.push_back(syms[c0 + i]);
        fbk = syms[c0 + i] ^ rem[npar-1];
        for (int j = npar - 1; j >= 1; j--) rem[j] = rem[j-1] ^ rmul(fbk, g[j], m);
        rem[0] = rmul(fbk, g[0], m);
      end
      for (int i = 0; i < npar; i++) cw.push_back(rem[npar-1-i]);
      foreach (cw[i]) for (int b = m - 1; b >= 0; b--) ref_bits.push_back(cw[i][b]);
    end
  endfunction

  // ---------------- monitors ----------------
  bit got_bits [$];
  int on_cycles = 0, one_cycles = 0, sw_cycles = 0, sw_bad = 0, sq_bad = 0;
  int drops = 0, rebuilds = 0, frame_ends = 0, pre_cycles = 0;
  int run_len = 0;
  logic sw_q = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.b_valid && dut.b_ready) got_bits.push_back(dut.b_bit);
    if (tx_on) on_cycles++;
    if (tx_bit) one_cycles++;
    if (switch_ctrl) sw_cycles++;
    if (switch_ctrl && !tx_bit) sw_bad++;
    // while the bit is '1', the switch level must change every HP cycles
    if (tx_bit) begin
      if (switch_ctrl == sw_q) run_len++;
      else begin
        if (run_len != HP && run_len != 0) sq_bad++;
        run_len = 1;
      end
    end else run_len = 0;
    sw_q <= switch_ctrl;
    if (frame_drop) drops++;
    if (gen_rebuild) rebuilds++;
    if (tx_frame_end) frame_ends++;
    if (tx_preamble) pre_cycles++;
  end

  task automatic send(int len, int m, int k);
    byte unsigned pay [$];
    int on0, ends0, exp_bits;
    for (int i = 0; i < len; i++) pay.push_back(8'($urandom_range(0, 255)));
    code_cfg = '{m: 3'(m), k: 7'(k)};
    got_bits.delete();
    on0 = on_cycles; ends0 = frame_ends;
    foreach (pay[i]) begin
      s_valid = 1; s_data = pay[i]; s_last = (i == len - 1);
      @(negedge clk);
      while (!s_ready) @(negedge clk);
      @(posedge clk); #1;
    end
    s_valid = 0; s_last = 0;
    if (len < PAYLOAD_MIN) begin
      repeat (20) @(posedge clk); #1;
      check("no bits for a dropped payload", got_bits.size(), 0);
      return;
    end
    ref_frame(pay, m, k);
    exp_bits = ref_bits.size();
    while (frame_ends == ends0) @(posedge clk);
    repeat (UPS + 4) @(posedge clk); #1;
    check($sformatf("bit count len=%0d RS(%0d,%0d)", len, (1 << m) - 1, k), got_bits.size(), exp_bits);
    begin
      int bad = 0;
      for (int i = 0; i < exp_bits && i < got_bits.size(); i++) if (got_bits[i] != ref_bits[i]) bad++;
      check($sformatf("bit errors len=%0d RS(%0d,%0d)", len, (1 << m) - 1, k), bad, 0);
    end
    check("air time", on_cycles - on0, exp_bits * UPS);
  endtask

  initial begin
    int pre0, rb0;
    s_valid = 0; s_data = 0; s_last = 0; shift_half_period = 0;
    code_cfg = '{m: 3'd6, k: 7'd45};
    repeat (3) @(posedge clk); rst_n = 1; #1;
    pre0 = pre_cycles;
    send(10, 6, 45);
    check("preamble handed out", pre_cycles - pre0 >= PREAMBLE_LEN ? 1 : 0, 1);
    rb0 = rebuilds;
    send(108, 6, 45);
    check("no rebuild without code change", rebuilds - rb0, 0);
    send(3, 6, 29);
    check("rebuild on code change", rebuilds - rb0 > 0 ? 1 : 0, 1);
    send(50, 6, 13);
    send(20, 3, 3);
    send(20, 7, 1);
    send(40, 5, 21);
    send(2, 6, 45);
    check("drop of a 2-byte payload", drops, 1);
    for (int i = 0; i < 4; i++) begin
      automatic int m = $urandom_range(3, 7);
      automatic int n = (1 << m) - 1;
      send($urandom_range(3, 108), m, 2 * $urandom_range(0, (n - 3) / 2) + 1);
    end
    check("switch only during '1' bits", sw_bad, 0);
    check("square wave half period", sq_bad, 0);
    checks++;
    if (sw_cycles * 10 < one_cycles * 4 || sw_cycles * 10 > one_cycles * 6) begin
      failures++; $display("FAIL switch duty %0d of %0d", sw_cycles, one_cycles);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
