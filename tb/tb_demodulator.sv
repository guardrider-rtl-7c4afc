// tb_demodulator: synthetic tag-channel frames (idle low level, the 36-bit
// preamble, random data bits) at random power levels, noise and start
// offsets are passed through a reference boxcar filter and fed to the
// demodulator with gaps between samples. Checks: lock on every frame, all
// data bits recovered, the adaptive threshold lies between the two levels,
// no lock on noise alone, stop releases the lock.
module tb_demodulator;
  import gr_pkg::*;
  localparam int SPB = 10;
  localparam int YW  = 20;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic s_valid, stop, m_valid, m_bit, locked;
  logic [YW-1:0] s_y, m_thresh;
  logic signed [YW+6:0] corr_thresh;
  demodulator #(.YW(YW), .SPB(SPB)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(string what, int got, int exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  bit got_bits [$];
  always @(posedge clk) if (m_valid) got_bits.push_back(m_bit);

  int win [$];   // last SPB power samples
  task automatic feed(int pw);
    int sum = 0;
    win.push_back(pw);
    if (win.size() > SPB) void'(win.pop_front());
    foreach (win[j]) sum += win[j];
    s_valid = 1; s_y = YW'(sum);
    @(posedge clk); #1;
    s_valid = 0;
    if ($urandom_range(0, 1)) begin @(posedge clk); #1; end
  endtask

  function automatic int noisy(int lvl, int nz);
    return lvl + $urandom_range(0, 2 * nz) - nz;
  endfunction

  task automatic frame(int hi, int lo, int nz, int ndata);
    bit data [$];
    int lead = $urandom_range(50, 200);
    got_bits.delete();
    corr_thresh = (YW+7)'(18 * SPB * (hi - lo) * 7 / 10);
    for (int j = 0; j < lead; j++) feed(noisy(lo, nz));
    check("not locked before preamble", int'(locked), 0);
    for (int b = 0; b < PREAMBLE_LEN; b++)
      for (int j = 0; j < SPB; j++) feed(noisy(PREAMBLE[PREAMBLE_LEN-1-b] ? hi : lo, nz));
    for (int b = 0; b < ndata; b++) begin
      data.push_back(1'($urandom_range(0, 1)));
      for (int j = 0; j < SPB; j++) feed(noisy(data[b] ? hi : lo, nz));
    end
    for (int j = 0; j < SPB; j++) feed(noisy(lo, nz));
    @(posedge clk); #1;
    check($sformatf("locked (hi %0d lo %0d)", hi, lo), int'(locked), 1);
    checks++;
    if (m_thresh <= YW'(SPB * lo) || m_thresh >= YW'(SPB * hi)) begin
      failures++; $display("FAIL threshold %0d not between %0d and %0d", m_thresh, SPB*lo, SPB*hi);
    end
    checks++;
    if (got_bits.size() < ndata || got_bits.size() > ndata + 1) begin
      failures++; $display("FAIL bit count %0d for %0d data bits", got_bits.size(), ndata);
    end
    for (int b = 0; b < ndata && b < got_bits.size(); b++)
      check($sformatf("bit %0d", b), int'(got_bits[b]), int'(data[b]));
    stop = 1; @(posedge clk); #1; stop = 0;
    check("stop releases lock", int'(locked), 0);
    win.delete();
  endtask

  initial begin
    s_valid = 0; s_y = 0; stop = 0; corr_thresh = '0;
    repeat (3) @(posedge clk); rst_n = 1; #1;
    frame(1000, 100, 0, 64);
    for (int f = 0; f < 8; f++)
      frame($urandom_range(800, 1200), $urandom_range(50, 150), 30, $urandom_range(100, 400));
    // noise alone must not lock
    corr_thresh = (YW+7)'(18 * SPB * 800 * 7 / 10);
    got_bits.delete();
    for (int j = 0; j < 3000; j++) feed(noisy(100, 60));
    check("no lock on noise", int'(locked), 0);
    check("no bits on noise", got_bits.size(), 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
