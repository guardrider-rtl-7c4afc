// tb_guardrider_codes: the evaluated configurations at full size (default
// parameters): the three prototype codes RS(63,45), RS(63,29), RS(63,13),
// each with frames hit by a silent period of 20, 40 and 60 us (10, 20, 30
// bits at 500 kb/s), and an n = 127 code. Every frame must be delivered
// with a good CRC, and the number of repaired symbols is reported.
// Same channel model as the other end-to-end tests.
module tb_guardrider_codes;
  import gr_pkg::*;
  localparam int UPS = 400;           // clocks per bit (default)
  localparam int SPB = 10;            // receiver samples per bit (default)
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

  guardrider dut (.*);

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

    begin
      int ks [4] = '{45, 29, 13, 101};
      int ms [4] = '{6, 6, 6, 7};
      for (int c = 0; c < 4; c++) begin
        code_in = '{m: 3'(ms[c]), k: 7'(ks[c])}; code_set = 1; @(posedge clk); #1; code_set = 0;
        for (int s = 1; s <= 3; s++) begin
          frame(60, 100, 10 * s, $sformatf("RS(%0d,%0d) silence %0d us", (1 << ms[c]) - 1, ks[c], 20 * s), ok, corr, rf);
          check($sformatf("RS(%0d,%0d) %0d us CRC", (1 << ms[c]) - 1, ks[c], 20 * s), int'(ok), 1);
          check($sformatf("RS(%0d,%0d) %0d us repaired", (1 << ms[c]) - 1, ks[c], 20 * s), int'(corr > 0), 1);
          if (corr > 0) n_corrected_frames++;
        end
      end
    end

    // every mechanism must have happened
    check("mechanism: frames sent", n_tx_frames, 12);
    check("mechanism: preamble lock per frame", n_locks, 12);
    check("mechanism: CRC pass", n_crc_ok, 12);
    check("mechanism: RS correction", n_corrected_frames, 12);
    check("mechanism: generator rebuild", int'(n_rebuild_cycles > 0), 1);
    check("no receive overruns", int'(rx_overrun), 0);
    $display("mechanisms: frames %0d locks %0d crc_ok %0d crc_bad %0d corrected %0d rs_fail %0d drop %0d rebuild_cycles %0d est %0d",
             n_tx_frames, n_locks, n_crc_ok, n_bad, n_corrected_frames, n_rs_fail, n_drop, n_rebuild_cycles, n_est);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (30000000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
