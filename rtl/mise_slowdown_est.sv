// mise_slowdown_est: turns one application's interval counters into a
// slowdown estimate, following the MISE model
//
//   ARSR     = hp_served / (hp_cycles - intf_cycles)
//   SRSR     = served / interval_cycles
//   alpha    = stall_cycles / interval_cycles
//   slowdown = (1 - alpha) + alpha * ARSR / SRSR
//
// It works in two divisions on one shared bit-serial divider:
//   ratio    = (hp_served * interval_cycles << SD_FRAC) / ((hp_cycles - intf_cycles) * served)
//   slowdown = ((interval_cycles - stall_cycles) << SD_FRAC + stall_cycles * ratio) / interval_cycles
// so that no precision is lost in the intermediate rates.  The result is Q8.8,
// clamped to at least 1.0 (a measured ARSR below SRSR is noise) and saturated
// at SD_MAX.  Cases the model does not define are this design's choices:
//   * no request served in the interval: the application did not touch memory,
//     so slowdown = 1.0 exactly;
//   * no highest-priority cycle left after removing interference: there is no
//     alone-rate sample, so `est_ok` is low and the caller keeps its previous
//     estimate.
// Timing: pulse `start` with `stats` and `interval_cycles` stable until
// `done`; `done` pulses 2*DIV_W+5 clock edges after the edge that samples
// `start` (134 cycles in all for DIV_W = 64; 2 edges for the two special
// cases), with `slowdown` and `est_ok`, which hold until the next start.
module mise_slowdown_est
  import mise_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  app_stats_t stats,
  input  cnt_t       interval_cycles,
  output logic       busy,
  output logic       done,
  output sd_t        slowdown,
  output logic       est_ok
);

  localparam int unsigned DIV_W   = 64;
  localparam int unsigned RATIO_W = 32;   // ratio saturates here (Q24.8)

  typedef enum logic [2:0] {S_IDLE, S_RATIO, S_RWAIT, S_SD, S_SWAIT, S_DONE} state_e;
  state_e state_q;

  logic             div_start, div_busy, div_done, div_dz;
  logic [DIV_W-1:0] div_num, div_den, div_quo;
  logic [RATIO_W-1:0] ratio_q;

  cnt_t hp_eff;
  assign hp_eff = (stats.hp_cycles > stats.intf_cycles) ?
                  stats.hp_cycles - stats.intf_cycles : '0;

  mise_divider #(.W(DIV_W)) u_div (
    .clk, .rst_n,
    .start(div_start), .num(div_num), .den(div_den),
    .busy(div_busy), .done(div_done), .quo(div_quo), .div_by_zero(div_dz)
  );

  // Operands of the two divisions.
  logic [DIV_W-1:0] ratio_num, ratio_den, sd_num, sd_den;
  always_comb begin
    ratio_num = (DIV_W'(stats.hp_served) * DIV_W'(interval_cycles)) << SD_FRAC;
    ratio_den =  DIV_W'(hp_eff) * DIV_W'(stats.served);
    sd_num    = (DIV_W'(interval_cycles - stats.stall_cycles) << SD_FRAC)
              +  DIV_W'(stats.stall_cycles) * DIV_W'(ratio_q);
    sd_den    =  DIV_W'(interval_cycles);
  end

  always_comb begin
    div_start = (state_q == S_RATIO) || (state_q == S_SD);
    div_num   = (state_q == S_SD) ? sd_num : ratio_num;
    div_den   = (state_q == S_SD) ? sd_den : ratio_den;
  end

  assign busy = (state_q != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q  <= S_IDLE;
      ratio_q  <= '0;
      slowdown <= SD_ONE;
      est_ok   <= 1'b0;
      done     <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state_q)
        S_IDLE: if (start) begin
          if (stats.served == '0) begin
            slowdown <= SD_ONE;
            est_ok   <= 1'b1;
            state_q  <= S_DONE;
          end else if (hp_eff == '0) begin
            est_ok   <= 1'b0;
            state_q  <= S_DONE;
          end else begin
            state_q  <= S_RATIO;
          end
        end
        S_RATIO: state_q <= S_RWAIT;
        S_RWAIT: if (div_done) begin
          ratio_q <= (div_quo > DIV_W'({RATIO_W{1'b1}})) ? '1 : div_quo[RATIO_W-1:0];
          state_q <= S_SD;
        end
        S_SD:    state_q <= S_SWAIT;
        S_SWAIT: if (div_done) begin
          if (div_quo > DIV_W'(SD_MAX))      slowdown <= SD_MAX;
          else if (div_quo < DIV_W'(SD_ONE)) slowdown <= SD_ONE;
          else                               slowdown <= div_quo[SD_W-1:0];
          est_ok  <= 1'b1;
          state_q <= S_DONE;
        end
        S_DONE: begin
          done    <= 1'b1;
          state_q <= S_IDLE;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // The divisor of the second division is the interval length and never zero.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (state_q == S_SWAIT && div_done) |-> !div_dz);

endmodule
