// mise_divider: unsigned sequential (restoring) divider, one quotient bit per
// clock.  Pulse `start` with `num` and `den`; `busy` is high while it works and
// `done` pulses for one cycle W clock edges after the edge that samples
// `start`, with `quo` = num / den
// valid from then until the next start.  A zero divisor gives an all-ones
// quotient and raises `div_by_zero` with `done`.  Shared by the slowdown
// estimator and the fairness controller, which each need a handful of
// divisions per interval and so have ample time for a bit-serial unit.
module mise_divider #(
  parameter int unsigned W = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [W-1:0] num,
  input  logic [W-1:0] den,
  output logic         busy,
  output logic         done,
  output logic [W-1:0] quo,
  output logic         div_by_zero
);

  logic [W-1:0]          dvd_q;   // dividend bits still to shift in
  logic [W-1:0]          den_q;
  logic [W:0]            rem_q;   // partial remainder
  logic [$clog2(W+1)-1:0] cnt_q;

  logic [W:0] rem_shift;
  logic [W:0] rem_sub;
  always_comb begin
    rem_shift = {rem_q[W-1:0], dvd_q[W-1]};
    rem_sub   = rem_shift - {1'b0, den_q};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy        <= 1'b0;
      done        <= 1'b0;
      quo         <= '0;
      dvd_q       <= '0;
      den_q       <= '0;
      rem_q       <= '0;
      cnt_q       <= '0;
      div_by_zero <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy        <= 1'b1;
        dvd_q       <= num;
        den_q       <= den;
        rem_q       <= '0;
        quo         <= '0;
        cnt_q       <= ($clog2(W+1))'(W);
        div_by_zero <= (den == '0);
      end else if (busy) begin
        // Restoring step: subtract if the shifted remainder is large enough.
        if (!rem_sub[W]) begin
          rem_q <= rem_sub;
          quo   <= {quo[W-2:0], 1'b1};
        end else begin
          rem_q <= rem_shift;
          quo   <= {quo[W-2:0], 1'b0};
        end
        dvd_q <= dvd_q << 1;
        cnt_q <= cnt_q - 1'b1;
        if (cnt_q == 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

endmodule
