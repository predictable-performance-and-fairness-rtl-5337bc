// mise_app_counters: the per-application measurement counters of the MISE
// model.  Over each interval it counts, for one application:
//   served       - requests of the application served by memory
//                  (with the interval length: the shared-request-service-rate)
//   hp_cycles    - cycles in which the application held highest priority
//   hp_served    - requests served while it held highest priority
//                  (hp_served / hp_cycles: the alone-request-service-rate)
//   intf_cycles  - highest-priority cycles in which it had a request waiting
//                  but the memory channel was busy with another application's
//                  request (the "interference counter" that removes residual
//                  interference from hp_cycles)
//   stall_cycles - cycles its core stalled on memory (gives alpha)
// The five counts follow the model's equations; what makes an interference
// cycle is this design's choice.  Counters saturate at all-ones.
//
// Timing: all event inputs are sampled every clock.  On `interval_end` the
// counts including that cycle's events are copied into `stats`, the counters
// restart from zero, and `stats_valid` pulses one cycle later together with the
// new `stats`.
module mise_app_counters
  import mise_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       interval_end, // last cycle of the current interval
  input  logic       is_prio,      // application holds highest priority
  input  logic       served,       // one of its requests finished service
  input  logic       intf,         // highest priority, request waiting, channel held by another app
  input  logic       stall,        // its core is stalled on memory
  output app_stats_t stats,
  output logic       stats_valid
);

  app_stats_t cnt_q, cnt_d;

  function automatic cnt_t sat_inc(cnt_t v, logic en);
    return (en && v != '1) ? v + 1'b1 : v;
  endfunction

  always_comb begin
    cnt_d.served       = sat_inc(cnt_q.served,       served);
    cnt_d.hp_cycles    = sat_inc(cnt_q.hp_cycles,    is_prio);
    cnt_d.hp_served    = sat_inc(cnt_q.hp_served,    is_prio && served);
    cnt_d.intf_cycles  = sat_inc(cnt_q.intf_cycles,  is_prio && intf);
    cnt_d.stall_cycles = sat_inc(cnt_q.stall_cycles, stall);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_q       <= '0;
      stats       <= '0;
      stats_valid <= 1'b0;
    end else begin
      stats_valid <= interval_end;
      if (interval_end) begin
        stats <= cnt_d;
        cnt_q <= '0;
      end else begin
        cnt_q <= cnt_d;
      end
    end
  end

endmodule
