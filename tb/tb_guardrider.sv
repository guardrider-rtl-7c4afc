// tb_guardrider: end-to-end test of the tag and both receiver branches
// through a simple channel model, with a shortened bit period.
//
// Channel model: every SMP clocks one tag-channel I/Q sample is formed from
// the tag's switch output over the interval (the delta_f square wave is
// removed by doubling its duty), times the excitation gate, plus uniform
// noise. Clearing the gate models a silent period of the WiFi excitation:
// the tag's bits in it are lost. The legacy channel is driven with on/off
// traffic whose run lengths are Pareto distributed.
//
// Sequence: clean frames with the reset code; a frame with a short silent
// period (corrected by the RS code); a frame with a long silent period (not
// correctable, flagged); a dropped 2-byte payload; a code loaded directly;
// traffic estimation choosing a new code and frames sent with it.
// Every mechanism is counted and one that never happened is a failure.
module tb_guardrider;
  import gr_pkg::*;
  localparam int UPS = 80;            // clocks per bit
  localparam int SPB = 4;             // receiver samples per bit
  localparam int SMP = UPS / SPB;     // clocks per tag-channel sample
  localparam int IQW = 16;
  localparam int AMP = 2000;          // tag-channel amplitude
  localparam int NZ  = 60;            // noise, +-

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic s_valid, s_ready, s_last;
  logic [7:0] s_data;
  logic [15:0] shift_half_period;
  logic switch_ctrl, tx_on, tx_bit, tx_frame_drop, tx_gen_rebuild, tx_preamble, tx_frame_end;
  logic code_set, code_found;
  code_cfg_t code_in, active_code;
  logic leg_valid, meas_enable, est_clear, est_start, est_done;
  logic signed [IQW-1:0] leg_i, leg_q;
  logic [IQW-1:0] on_thresh;
  logic [31:0] rate, pe_th, mean_on, mean_off, p_s, alpha, beta;
  logic [15:0] n_on, n_off, est_overrun, rx_overrun, rx_corrected;
  logic [23:0] lambda_on, lambda_off, min_on, min_off;
  logic mean_on_ok, mean_off_ok;
  logic bs_valid;
  logic signed [IQW-1:0] bs_i, bs_q;
  logic signed [IQW+$clog2(SPB+1)+6:0] corr_thresh;
  logic rx_locked, rx_valid, rx_frame_done, rx_crc_ok, rx_rs_fail, rx_dec_busy;
  logic [7:0] rx_data, rx_length;
  logic [IQW+$clog2(SPB+1)-1:0] rx_thresh;

  guardrider #(.UPSAMPLE(UPS), .SPB(SPB), .IQW(IQW)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(string what, int got, int exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  // ---------------- tag-channel model ----------------
  bit excite = 1;
  int sw_cnt = 0, smp_cnt = 0;
  int amp;
  always @(posedge clk) begin
    bs_valid <= 1'b0;
    if (rst_n) begin
      sw_cnt = sw_cnt + int'(switch_ctrl);
      smp_cnt++;
      if (smp_cnt == SMP) begin
        amp = excite ? (2 * AMP * sw_cnt) / SMP : 0;
        bs_valid <= 1'b1;
        bs_i <= IQW'(amp + $urandom_range(0, 2 * NZ) - NZ);
        bs_q <= IQW'($urandom_range(0, 2 * NZ) - NZ);
        smp_cnt = 0; sw_cnt = 0;
      end
    end
  end

  // ---------------- mechanism counters ----------------
  int n_locks = 0, n_tx_frames = 0, n_crc_ok = 0, n_bad = 0, n_drop = 0;
  int n_rebuild_cycles = 0, n_corrected_frames = 0, n_est = 0, n_rs_fail = 0;
  int n_preamble = 0, n_payload_ok = 0;
  logic lock_q = 0, reb_q = 0;
  byte unsigned rx_bytes [$];
  always @(posedge clk) if (rst_n) begin
    if (rx_locked && !lock_q) n_locks++;
    lock_q <= rx_locked;
    if (tx_frame_end) n_tx_frames++;
    if (tx_preamble) n_preamble++;
    if (tx_frame_drop) n_drop++;
    if (tx_gen_rebuild) n_rebuild_cycles++;
    if (est_done) n_est++;
    if (rx_valid) rx_bytes.push_back(rx_data);
    if (rx_frame_done) begin
      if (rx_crc_ok) n_crc_ok++; else n_bad++;
      if (rx_rs_fail) n_rs_fail++;
    end
  end

  // ---------------- stimulus helpers ----------------
  task automatic send_payload(byte unsigned pay [$]);
    foreach (pay[i]) begin
      s_valid = 1; s_data = pay[i]; s_last = (i == pay.size() - 1);
      @(negedge clk);
      while (!s_ready) @(negedge clk);
      @(posedge clk); #1;
    end
    s_valid = 0; s_last = 0;
  endtask

  // Sends one frame; optionally silences the excitation for sil_bits bits
  // starting sil_at bits after the first preamble bit. Returns the outcome.
  task automatic frame(int len, int sil_at, int sil_bits, string what,
                       output bit crc_ok, output int corrected, output bit rs_fail);
    byte unsigned pay [$];
    int t0, ok0;
    bit done = 0;
    for (int i = 0; i < len; i++) pay.push_back(8'($urandom_range(0, 255)));
    rx_bytes.delete();
    fork
      send_payload(pay);
      if (sil_bits > 0) begin
        while (!tx_on) @(posedge clk);
        repeat (sil_at * UPS) @(posedge clk);
        excite = 0;
        repeat (sil_bits * UPS) @(posedge clk);
        excite = 1;
      end
    join
    t0 = 0;
    while (!rx_frame_done && t0 < 2000000) begin @(posedge clk); t0++; end
    crc_ok = rx_crc_ok; rs_fail = rx_rs_fail;
    @(posedge clk); #1;
    corrected = int'(rx_corrected);
    $display("%s: locks %0d threshold %0d length %0d crc_ok %0d rs_fail %0d corrected %0d",
             what, n_locks, rx_thresh, rx_length, crc_ok, rs_fail, corrected);
    check({what, ": frame received"}, int'(t0 < 2000000), 1);
    check({what, ": length"}, int'(rx_length), len);
    if (crc_ok) begin
      int bad = 0;
      if (rx_bytes.size() != len) bad++;
      else foreach (pay[i]) if (rx_bytes[i] != pay[i]) bad++;
      check({what, ": payload"}, bad, 0);
      if (bad == 0) n_payload_ok++;
    end
    // let the tag finish and the channel go quiet
    while (tx_on) @(posedge clk);
    repeat (20 * UPS) @(posedge clk); #1;
  endtask

  // Legacy-channel traffic: npairs on/off runs (in samples, Pareto).
  task automatic traffic(int npairs, int on_xm, int off_xm, real lam);
    int d;
    for (int r = 0; r < 2 * npairs + 1; r++) begin
      real u = real'($urandom_range(1, 1000000)) / 1000000.0;
      d = int'(real'((r % 2 == 0) ? on_xm : off_xm) * $pow(u, -1.0 / lam));
      if (d > 200000) d = 200000;
      for (int j = 0; j < d; j++) begin
        leg_valid = 1;
        leg_i = (r % 2 == 0) ? IQW'(1500 + $urandom_range(0, 100)) : IQW'($urandom_range(0, 2 * NZ) - NZ);
        leg_q = IQW'($urandom_range(0, 2 * NZ) - NZ);
        @(posedge clk); #1;
        leg_valid = 0;
        @(posedge clk); #1;
      end
    end
  endtask

  initial begin
    bit ok, rf;
    int corr;
    code_cfg_t code_prev;
    s_valid = 0; s_data = 0; s_last = 0; shift_half_period = 0;
    code_set = 0; code_in = '0;
    leg_valid = 0; leg_i = 0; leg_q = 0; on_thresh = 16'd700;
    meas_enable = 0; est_clear = 0; est_start = 0;
    rate = 32'd6554; pe_th = 32'd1073742;   // R = 0.1, 10^-3
    corr_thresh = '0;
    corr_thresh = ($bits(corr_thresh))'(18 * SPB * AMP * 6 / 10);
    repeat (5) @(posedge clk); rst_n = 1; #1;
    repeat (40 * UPS) @(posedge clk); #1;

    // 1. reset code RS(63,45), clean channel
    check("reset code m", int'(active_code.m), 6);
    check("reset code k", int'(active_code.k), 45);
    frame(20, 0, 0, "clean RS(63,45)", ok, corr, rf);
    check("clean frame CRC", int'(ok), 1);
    check("clean frame no corrections", corr, 0);
    frame(108, 0, 0, "108 bytes RS(63,45)", ok, corr, rf);
    check("108-byte frame CRC", int'(ok), 1);

    // 2. short silent period: 20 bits (4 symbols) inside the frame
    frame(60, 200, 20, "short silence", ok, corr, rf);
    check("short silence: CRC", int'(ok), 1);
    check("short silence: corrected", int'(corr > 0), 1);
    if (corr > 0) n_corrected_frames++;

    // 3. long silent period: 200 bits, beyond t = 9 of one codeword
    frame(100, 150, 200, "long silence", ok, corr, rf);
    check("long silence: flagged by decoder", int'(rf), 1);
    check("long silence: CRC fails", int'(ok), 0);

    // 4. too short payload is dropped by the tag
    begin
      byte unsigned two [$] = '{8'h12, 8'h34};
      send_payload(two);
      repeat (20) @(posedge clk); #1;
      check("drop of 2-byte payload", n_drop, 1);
    end

    // 5. a code loaded directly: RS(15,7)
    code_in = '{m: 3'd4, k: 7'd7}; code_set = 1; @(posedge clk); #1; code_set = 0;
    frame(30, 0, 0, "RS(15,7)", ok, corr, rf);
    check("RS(15,7) frame CRC", int'(ok), 1);
    frame(30, 100, 6, "RS(15,7) short silence", ok, corr, rf);
    check("RS(15,7) short silence CRC", int'(ok), 1);
    if (corr > 0) n_corrected_frames++;

    // 6. traffic estimation: on runs >= 1500 samples, off runs >= 60,
    //    shape 2.5 (mean on 2500, mean off 100): p_s about 0.04
    code_prev = active_code;
    est_clear = 1; @(posedge clk); #1; est_clear = 0;
    meas_enable = 1;
    traffic(40, 1500, 60, 2.5);
    meas_enable = 0;
    repeat (50) @(posedge clk); #1;
    est_start = 1; @(posedge clk); #1; est_start = 0;
    begin
      automatic int t = 0;
      while (!est_done && t < 100000) begin @(posedge clk); t++; end
    end
    @(posedge clk); #1;
    check("estimate finished", n_est, 1);
    check("estimate counts on runs", int'(n_on >= 35), 1);
    check("estimate counts off runs", int'(n_off >= 35), 1);
    check("code found", int'(code_found), 1);
    check("new code legal", int'(code_cfg_ok(active_code)), 1);
    check("code changed", int'(active_code != code_prev), 1);
    checks++;
    if (p_s < 32'd10737418 || p_s > 32'd107374182) begin   // 0.01 .. 0.1
      failures++; $display("FAIL p_s %f out of range", real'(p_s) / 1073741824.0);
    end
    $display("estimate: on %0d runs mean %0d, off %0d runs mean %0d, p_s %f -> RS(%0d,%0d)",
             n_on, mean_on >> 8, n_off, mean_off >> 8, real'(p_s) / 1073741824.0,
             (1 << active_code.m) - 1, active_code.k);
    begin
      int rb0 = n_rebuild_cycles;
      frame(50, 0, 0, "estimated code", ok, corr, rf);
      check("estimated code: CRC", int'(ok), 1);
      check("estimated code: generator rebuilt", int'(n_rebuild_cycles > rb0), 1);
    end
    frame(80, 120, 4 * int'(active_code.m), "estimated code, silence", ok, corr, rf);
    check("estimated code, silence: CRC", int'(ok), 1);
    if (corr > 0) n_corrected_frames++;

    // every mechanism must have happened
    check("mechanism: frames sent", int'(n_tx_frames >= 8), 1);
    check("mechanism: preamble sent", int'(n_preamble > 0), 1);
    check("mechanism: preamble lock per frame", int'(n_locks >= n_tx_frames), 1);
    check("mechanism: CRC pass", int'(n_crc_ok >= 6), 1);
    check("mechanism: payload delivered", int'(n_payload_ok >= 6), 1);
    check("mechanism: CRC fail", int'(n_bad > 0), 1);
    check("mechanism: RS correction", int'(n_corrected_frames >= 2), 1);
    check("mechanism: RS decoder failure flag", int'(n_rs_fail > 0), 1);
    check("mechanism: frame drop", int'(n_drop > 0), 1);
    check("mechanism: generator rebuild", int'(n_rebuild_cycles > 0), 1);
    check("mechanism: estimation", n_est, 1);
    check("no receive overruns", int'(rx_overrun), 0);
    check("no estimator overruns", int'(est_overrun), 0);
    $display("mechanisms: frames %0d locks %0d crc_ok %0d crc_bad %0d corrected %0d rs_fail %0d drop %0d rebuild_cycles %0d est %0d",
             n_tx_frames, n_locks, n_crc_ok, n_bad, n_corrected_frames, n_rs_fail, n_drop, n_rebuild_cycles, n_est);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
