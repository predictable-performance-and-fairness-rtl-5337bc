// mise_qos_ctrl: MISE-QoS bandwidth controller.  It gives one application of
// interest (AoI) just enough memory bandwidth to keep its estimated slowdown
// within a bound set by system software, and reports when the bound cannot be
// met even by prioritising the AoI all the time.
//
// Each time a new AoI slowdown estimate arrives (`est_valid` with `est_ok`):
//   * estimate above `bound`: the AoI's allocation grows by ALLOC_STEP tickets
//     (up to TOTAL_TICKETS, which is "always prioritise");
//   * estimate below `bound`: it shrinks by ALLOC_STEP, but never under
//     MIN_ALLOC, so the AoI keeps some highest-priority epochs and its
//     alone-rate stays measurable;
//   * `bound_met` is set to (estimate <= bound) and `bound_unreachable` to
//     (estimate > bound while the allocation already was TOTAL_TICKETS).
// The remaining tickets are shared equally by the other applications (any
// remainder of the division goes to the lottery's rotating fallback).
// Raising and lowering the AoI's bandwidth from the comparison with the bound,
// and the unreachable-bound detection, follow the method; the step size, the
// floor, the initial share and the equal split among the others are this
// design's choices.  Timing: `tickets`, `bound_met` and `bound_unreachable`
// update the cycle after `est_valid`.
module mise_qos_ctrl
  import mise_pkg::*;
#(
  parameter int unsigned N_APPS     = N_APPS_DEF,
  parameter int unsigned ALLOC_STEP = 10,
  parameter int unsigned MIN_ALLOC  = 10,
  parameter int unsigned INIT_ALLOC = TOTAL_TICKETS / N_APPS
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [$clog2(N_APPS)-1:0] aoi,
  input  sd_t                       bound,
  input  logic                      est_valid,
  input  logic                      est_ok,
  input  sd_t                       aoi_slowdown,
  output ticket_t                   tickets [N_APPS],
  output ticket_t                   aoi_alloc,
  output logic                      bound_met,
  output logic                      bound_unreachable
);

  ticket_t alloc_q;
  ticket_t others_share;

  assign aoi_alloc    = alloc_q;
  assign others_share = ticket_t'((TOTAL_TICKETS - int'(alloc_q)) / (N_APPS - 1));

  always_comb
    for (int i = 0; i < N_APPS; i++)
      tickets[i] = (i == int'(aoi)) ? alloc_q : others_share;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      alloc_q           <= ticket_t'(INIT_ALLOC);
      bound_met         <= 1'b1;
      bound_unreachable <= 1'b0;
    end else if (est_valid && est_ok) begin
      bound_met         <= (aoi_slowdown <= bound);
      bound_unreachable <= (aoi_slowdown > bound) && (alloc_q == ticket_t'(TOTAL_TICKETS));
      if (aoi_slowdown > bound)
        alloc_q <= (int'(alloc_q) + ALLOC_STEP >= TOTAL_TICKETS) ?
                   ticket_t'(TOTAL_TICKETS) : alloc_q + ticket_t'(ALLOC_STEP);
      else if (aoi_slowdown < bound)
        alloc_q <= (int'(alloc_q) <= MIN_ALLOC + ALLOC_STEP) ?
                   ticket_t'(MIN_ALLOC) : alloc_q - ticket_t'(ALLOC_STEP);
    end
  end

  initial assert (N_APPS >= 2 && MIN_ALLOC <= TOTAL_TICKETS && INIT_ALLOC <= TOTAL_TICKETS)
    else $error("mise_qos_ctrl: bad parameters");

endmodule
