// tb_upsampler: self-checking test of the sample-and-hold upsampler.
// Feeds a random bit sequence (with gaps in s_valid) and checks that every
// bit appears on up_bit for exactly UPSAMPLE cycles with up_on high, in order,
// and that bit_start marks the first cycle of each bit.
module tb_upsampler;
  localparam int U = 7;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic s_valid, s_ready, s_bit, up_bit, up_on, bit_start;
  upsampler #(.UPSAMPLE(U)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(string what, int got, int exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  bit sent [$];
  int run_len, run_val, runs, bit_idx;
  bit prev_on;

  // Monitor: cut the output into held bits using bit_start.
  always @(posedge clk) if (rst_n) begin
    if (bit_start) begin
      if (run_len != 0) begin
        check("hold length", run_len, U);
      end
      run_len = 1;
      check($sformatf("bit %0d value", bit_idx), up_bit, sent[bit_idx]);
      bit_idx++;
    end else if (up_on) begin
      run_len++;
      check("held value", up_bit, sent[bit_idx-1]);
    end else if (run_len != 0) begin
      check("hold length", run_len, U);
      run_len = 0;
    end
  end

  initial begin
    s_valid = 0; s_bit = 0; run_len = 0; bit_idx = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 60; i++) begin
      @(negedge clk);
      s_valid = 1; s_bit = 1'($urandom);
      while (!s_ready) @(negedge clk);
      sent.push_back(s_bit);
      @(posedge clk); #1;
      s_valid = 0;
      if (i % 10 == 9) repeat ($urandom_range(U, 3*U)) @(posedge clk);
    end
    repeat (3*U) @(posedge clk);
    check("bits out", bit_idx, 60);
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
