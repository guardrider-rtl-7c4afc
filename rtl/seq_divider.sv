// seq_divider: unsigned restoring divider, one quotient bit per cycle.
//
// Helper of the receiver's estimators (Pareto MLE and Markov parameters),
// which need a handful of divisions per estimate, so a small sequential
// divider is enough. quo = num / den, rem = num % den; den = 0 gives an
// all-ones quotient.
//
// Interface: pulse start with num/den valid; done pulses W cycles later with
// quo/rem valid (held until the next start).
module seq_divider #(
  parameter int unsigned W = 64
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [W-1:0] num,
  input  logic [W-1:0] den,
  output logic         busy,
  output logic         done,
  output logic [W-1:0] quo,
  output logic [W-1:0] rem
);

  localparam int unsigned CW = $clog2(W + 1);
  logic [CW-1:0] cnt;
  logic [W-1:0]  d;
  logic [W:0]    trial;

  assign trial = {rem, quo[W-1]} - {1'b0, d};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt  <= '0;
      busy <= 1'b0;
      done <= 1'b0;
      quo  <= '0;
      rem  <= '0;
      d    <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        quo  <= num;
        rem  <= '0;
        d    <= den;
        cnt  <= CW'(W);
        busy <= 1'b1;
      end else if (busy) begin
        // shift one dividend bit into the remainder, subtract if it fits
        if (!trial[W]) begin
          rem <= trial[W-1:0];
          quo <= {quo[W-2:0], 1'b1};
        end else begin
          rem <= {rem[W-2:0], quo[W-1]};
          quo <= {quo[W-2:0], 1'b0};
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
