// log2_unit: fixed-point base-2 logarithm of an unsigned integer.
//
// Helper of the Pareto estimator, which needs log(x) of every measured
// duration. The integer part is the position of the leading one; the FRAC
// fractional bits come from repeated squaring of the mantissa y in [1,2):
// each squaring that reaches 2 yields a 1 bit and halves y. The result is
// truncated (error below 2^-FRAC plus the mantissa rounding).
//
// Interface (XW >= FRAC + 2): pulse start with x (x >= 1; x = 0 gives 0); done pulses FRAC+1
// cycles later with y = log2(x) in unsigned Q(IW).FRAC format.
module log2_unit #(
  parameter int unsigned XW   = 32,
  parameter int unsigned FRAC = 16,
  parameter int unsigned IW   = $clog2(XW)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic [XW-1:0]       x,
  output logic                busy,
  output logic                done,
  output logic [IW+FRAC-1:0]  y
);

  localparam int unsigned MW = FRAC + 2;    // mantissa Q1.(FRAC+1)
  localparam int unsigned CW = $clog2(FRAC + 1);

  logic [MW-1:0]   mant;
  logic [2*MW-1:0] sq;
  logic [CW-1:0]   cnt;
  logic [IW-1:0]   msb;
  logic [XW-1:0]   xn;

  // leading one and normalised value
  always_comb begin
    msb = '0;
    for (int i = 0; i < XW; i++) if (x[i]) msb = IW'(i);
    xn = x << (IW'(XW - 1) - msb);
  end

  if (XW < MW) begin : g_check
    $error("log2_unit: XW must be at least FRAC + 2");
  end

  assign sq = mant * mant;   // Q2.(2*(MW-1))

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mant <= '0;
      cnt  <= '0;
      busy <= 1'b0;
      done <= 1'b0;
      y    <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        y    <= {msb, FRAC'(0)};
        mant <= xn[XW-1 -: MW];
        cnt  <= CW'(FRAC);
        busy <= 1'b1;
      end else if (busy) begin
        if (sq[2*MW-1]) begin
          // y^2 >= 2: emit 1, halve
          y[cnt - 1'b1] <= 1'b1;
          mant <= sq[2*MW-1 -: MW];
        end else begin
          mant <= sq[2*MW-2 -: MW];
        end
        cnt <= cnt - 1'b1;
        if (cnt == CW'(1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

endmodule
