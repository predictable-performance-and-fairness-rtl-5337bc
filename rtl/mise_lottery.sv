// mise_lottery: lottery scheduler that decides which application holds
// highest priority at the memory controller for the next epoch.
//
// Each application owns `tickets[i]` of the TOTAL_TICKETS tickets that stand
// for the whole memory bandwidth.  On `draw` a pseudo-random number r in
// [0, TOTAL_TICKETS) is taken from a free-running 16-bit LFSR
// (r = lfsr * TOTAL_TICKETS >> 16) and the application whose cumulative ticket
// range holds r wins: application i wins with probability
// tickets[i] / TOTAL_TICKETS.  Tickets that no application owns (the sum is
// below TOTAL_TICKETS) go to a rotating pointer, so no epoch is left without
// a highest-priority application.  Enforcing the allocation by lottery
// scheduling follows the method; the LFSR, its polynomial (x^16+x^14+x^13+x^11+1)
// and the rotating fallback are this design's choices.
//
// Timing: `prio_app` changes in the cycle after `draw` and holds until the
// next draw.  `SEED` sets the LFSR start value after reset (must be nonzero).
module mise_lottery
  import mise_pkg::*;
#(
  parameter int unsigned N_APPS = N_APPS_DEF,
  parameter logic [15:0] SEED   = 16'hACE1
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      draw,
  input  ticket_t                   tickets [N_APPS],
  output logic [$clog2(N_APPS)-1:0] prio_app
);

  localparam int unsigned AW = $clog2(N_APPS);
  localparam int unsigned SUM_W = TICKET_W + AW + 1;

  logic [15:0]  lfsr_q;
  logic [AW-1:0] rot_q;

  // Random ticket number in [0, TOTAL_TICKETS).
  logic [SUM_W-1:0] r;
  logic [16+TICKET_W-1:0] r_scaled;
  assign r_scaled = 24'(lfsr_q) * (16+TICKET_W)'(TOTAL_TICKETS);
  assign r        = SUM_W'(r_scaled >> 16);

  // Winner: first application whose cumulative range passes r.
  logic [AW-1:0]   winner;
  logic            found;
  logic [SUM_W-1:0] cum;
  always_comb begin
    cum    = '0;
    found  = 1'b0;
    winner = rot_q;
    for (int i = 0; i < N_APPS; i++) begin
      cum = cum + SUM_W'(tickets[i]);
      if (!found && r < cum) begin
        found  = 1'b1;
        winner = AW'(i);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lfsr_q   <= SEED;
      rot_q    <= '0;
      prio_app <= '0;
    end else begin
      // Galois LFSR, taps 16,14,13,11.
      lfsr_q <= {1'b0, lfsr_q[15:1]} ^ (lfsr_q[0] ? 16'hB400 : 16'h0000);
      if (draw) begin
        prio_app <= winner;
        if (!found) rot_q <= (rot_q == AW'(N_APPS-1)) ? '0 : rot_q + 1'b1;
      end
    end
  end

  initial assert (SEED != 16'h0) else $error("mise_lottery: SEED must be nonzero");

endmodule
