// mise_fair_ctrl: MISE-Fair bandwidth controller.  It keeps a slowdown bound B
// common to all applications and a ticket allocation that splits the memory
// bandwidth among them, and after every round of slowdown estimates it moves
// bandwidth towards the applications that are slowed down most.
//
// Per round (`est_valid`, estimates `slowdown[i]` with `est_ok[i]`):
//   1. need[i] = tickets[i] * slowdown[i] / B  (Q.8 tickets): the share that
//      would bring application i to the bound if its performance scales with
//      the bandwidth it gets.  An application without a fresh estimate keeps
//      need[i] = tickets[i].
//   2. If the needs add up to more than TOTAL_TICKETS the bound cannot be met
//      and B rises by B_STEP.  Otherwise, if every estimate is at least B_STEP
//      under B, the bound is easily met and B falls by B_STEP (not below 1.0).
//   3. tickets[i] = MIN_TICKETS + need[i] * (TOTAL_TICKETS - N*MIN_TICKETS) / sum(need),
//      so that more-slowed-down applications get more bandwidth, the tickets
//      never add up to more than TOTAL_TICKETS and every application keeps a
//      few highest-priority epochs for its own estimate.
// Growing B when it cannot be met, shrinking it when it is easily met and
// giving more bandwidth to more-slowed-down applications follow the method;
// the formulas for need, the step, the floor and the initial values are this
// design's choices.  The 2*N divisions share one bit-serial divider, so a
// round takes about 2*N*(DIV_W+3) cycles; `done` pulses when the new tickets
// and bound are in place.
module mise_fair_ctrl
  import mise_pkg::*;
#(
  parameter int unsigned N_APPS      = N_APPS_DEF,
  parameter logic [SD_W-1:0] B_INIT  = 16'h0200,   // 2.0
  parameter logic [SD_W-1:0] B_STEP  = 16'h0020,   // 0.125
  parameter int unsigned MIN_TICKETS = 2
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        est_valid,
  input  logic [N_APPS-1:0] est_ok,
  input  sd_t         slowdown [N_APPS],
  output ticket_t     tickets  [N_APPS],
  output sd_t         bound,
  output logic        bound_raised,   // pulses for one cycle when B grows
  output logic        busy,
  output logic        done
);

  localparam int unsigned AW    = $clog2(N_APPS);
  localparam int unsigned DIV_W = 40;
  localparam int unsigned NEED_W = 32;

  typedef enum logic [2:0] {S_IDLE, S_NEED, S_NWAIT, S_DECIDE, S_ALLOC, S_AWAIT, S_DONE} state_e;
  state_e state_q;

  logic [AW-1:0]     idx_q;
  sd_t               sd_q    [N_APPS];
  logic [N_APPS-1:0] ok_q;
  logic [NEED_W-1:0] need_q  [N_APPS];
  logic [NEED_W+AW-1:0] sum_q;
  sd_t               max_q;

  logic             div_start, div_busy, div_done, div_dz;
  logic [DIV_W-1:0] div_num, div_den, div_quo;

  mise_divider #(.W(DIV_W)) u_div (
    .clk, .rst_n,
    .start(div_start), .num(div_num), .den(div_den),
    .busy(div_busy), .done(div_done), .quo(div_quo), .div_by_zero(div_dz)
  );

  localparam int unsigned SPREAD = TOTAL_TICKETS - N_APPS * MIN_TICKETS;

  always_comb begin
    div_start = (state_q == S_NEED) || (state_q == S_ALLOC);
    if (state_q == S_ALLOC || state_q == S_AWAIT) begin
      div_num = DIV_W'(need_q[idx_q]) * DIV_W'(SPREAD);
      div_den = DIV_W'(sum_q);
    end else begin
      div_num = (DIV_W'(tickets[idx_q]) * DIV_W'(sd_q[idx_q])) << 8;
      div_den = DIV_W'(bound);
    end
  end

  assign busy = (state_q != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q      <= S_IDLE;
      idx_q        <= '0;
      ok_q         <= '0;
      sum_q        <= '0;
      max_q        <= '0;
      bound        <= B_INIT;
      bound_raised <= 1'b0;
      done         <= 1'b0;
      for (int i = 0; i < N_APPS; i++) begin
        sd_q[i]    <= SD_ONE;
        need_q[i]  <= '0;
        tickets[i] <= ticket_t'(TOTAL_TICKETS / N_APPS);
      end
    end else begin
      done         <= 1'b0;
      bound_raised <= 1'b0;
      unique case (state_q)
        S_IDLE: if (est_valid) begin
          sd_q    <= slowdown;
          ok_q    <= est_ok;
          idx_q   <= '0;
          sum_q   <= '0;
          max_q   <= '0;
          state_q <= S_NEED;
        end
        S_NEED: state_q <= S_NWAIT;
        S_NWAIT: if (div_done) begin
          logic [NEED_W-1:0] n;
          n = ok_q[idx_q] ? div_quo[NEED_W-1:0] : NEED_W'(tickets[idx_q]) << 8;
          need_q[idx_q] <= n;
          sum_q <= sum_q + (NEED_W+AW)'(n);
          if (ok_q[idx_q] && sd_q[idx_q] > max_q) max_q <= sd_q[idx_q];
          if (idx_q == AW'(N_APPS-1)) begin
            state_q <= S_DECIDE;
          end else begin
            idx_q   <= idx_q + 1'b1;
            state_q <= S_NEED;
          end
        end
        S_DECIDE: begin
          if (sum_q > (NEED_W+AW)'(TOTAL_TICKETS) << 8) begin
            bound        <= (bound > SD_MAX - B_STEP) ? SD_MAX : bound + B_STEP;
            bound_raised <= 1'b1;
          end else if ({1'b0, max_q} + {1'b0, B_STEP} <= {1'b0, bound}) begin
            bound <= (bound < SD_ONE + B_STEP) ? SD_ONE : bound - B_STEP;
          end
          idx_q   <= '0;
          state_q <= (sum_q == '0) ? S_DONE : S_ALLOC;
        end
        S_ALLOC: state_q <= S_AWAIT;
        S_AWAIT: if (div_done) begin
          tickets[idx_q] <= ticket_t'(MIN_TICKETS) + ticket_t'(div_quo);
          if (idx_q == AW'(N_APPS-1)) begin
            state_q <= S_DONE;
          end else begin
            idx_q   <= idx_q + 1'b1;
            state_q <= S_ALLOC;
          end
        end
        S_DONE: begin
          done    <= 1'b1;
          state_q <= S_IDLE;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  initial assert (N_APPS * MIN_TICKETS < TOTAL_TICKETS)
    else $error("mise_fair_ctrl: MIN_TICKETS too large");

endmodule
