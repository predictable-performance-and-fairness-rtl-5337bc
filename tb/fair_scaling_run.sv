// fair_scaling_run: one MISE-Fair run with N cores for the core-count scaling
// test.  Core i computes 10 + 40*i cycles between memory requests, so core 0
// is the most memory-intensive.  The run measures every core's alone speed,
// then enables all cores at an interval boundary.  The first shared interval
// runs with equal tickets (the starting allocation) and gives the baseline
// maximum slowdown; MISE-Fair then adapts for RUN_INTERVALS intervals.  It
// reports, through its ports, the number of checks and failures:
//   * the mean absolute error of all estimates from the second shared interval
//     on, against the slowdown measured over the same interval, at most 25 %,
//     and no single estimate off by more than 50 %.  The bound is wider than
//     the unit tests' because the slowdown formula itself is biased low for
//     these cores: a core computing t cycles per blocking request of alone
//     latency ma and shared latency ms is estimated at t/(t+ms) + ms/(t+ma)
//     while its true slowdown is (t+ms)/(t+ma), about 15-20 % more at 8 and
//     16 cores.  Short test intervals add sampling noise on top;
//   * the mean maximum slowdown over the last five intervals no higher than
//     the equal-share baseline.
module fair_scaling_run #(
  parameter int N             = 4,
  parameter int EPOCH         = 1000,
  parameter int EPI           = 80,
  parameter int LAT           = 20,
  parameter int RUN_INTERVALS = 16
) (
  input  logic clk,
  input  logic rst_n,
  input  logic go,
  output logic finished,
  output int   checks,
  output int   failures,
  output real  base_max,
  output real  final_max
);
  import mise_pkg::*;
  localparam int AW = $clog2(N);
  localparam int AWD = 32;
  localparam int INTERVAL = EPOCH * EPI;

  logic [N-1:0] req_valid, req_ready, core_stall, slowdown_ok;
  logic [AWD-1:0] req_addr [N];
  logic mem_valid, mem_ready, resp_valid;
  logic [AW-1:0] mem_app, resp_app, prio_app;
  logic [AWD-1:0] mem_addr;
  logic epoch_start, interval_end, est_done;
  sd_t slowdown [N];
  ticket_t tickets [N];
  logic qos_bound_met, qos_bound_unreachable, fair_bound_raised;
  sd_t fair_bound;
  logic [N-1:0] enable;
  int unsigned think [N];
  int unsigned done_reqs [N];

  mise_top #(.N_APPS(N), .ADDR_W(AWD), .EPOCH_CYCLES(EPOCH), .EPOCHS_PER_INTERVAL(EPI)) dut (
    .clk, .rst_n, .mode(MODE_FAIR), .aoi('0), .qos_bound(16'h0200),
    .req_valid, .req_addr, .req_ready, .mem_valid, .mem_ready, .mem_app, .mem_addr,
    .resp_valid, .resp_app, .core_stall, .prio_app, .epoch_start, .interval_end,
    .slowdown, .slowdown_ok, .est_done, .tickets, .qos_bound_met, .qos_bound_unreachable,
    .fair_bound, .fair_bound_raised
  );

  mem_channel_model #(.N_APPS(N), .LAT(LAT)) u_mem (
    .clk, .rst_n, .mem_valid, .mem_ready, .mem_app, .resp_valid, .resp_app
  );

  for (genvar g = 0; g < N; g++) begin : g_core
    assign think[g] = 10 + 40 * g;
    core_model #(.ID(g), .N_APPS(N), .ADDR_W(AWD)) u_core (
      .clk, .rst_n, .enable(enable[g]), .think(think[g]),
      .req_valid(req_valid[g]), .req_addr(req_addr[g]), .req_ready(req_ready[g]),
      .resp_valid, .resp_app, .stall(core_stall[g]), .done_reqs(done_reqs[g])
    );
  end

  real alone_cpr [N];
  int unsigned base_reqs [N];
  real actual [N];
  real max_act;
  int  n_iv = 0;          // shared intervals completed
  logic shared_on = 0;
  real tail_sum = 0.0;
  real abs_err_sum = 0.0;
  int  n_est = 0;

  always @(posedge clk) if (rst_n && interval_end && shared_on) begin
    max_act = 0.0;
    for (int i = 0; i < N; i++) begin
      actual[i] = alone_cpr[i] * real'(done_reqs[i] - base_reqs[i]) / real'(INTERVAL);
      actual[i] = (actual[i] > 0.0) ? 1.0 / actual[i] : 0.0;
      if (actual[i] > max_act) max_act = actual[i];
      base_reqs[i] = done_reqs[i];
    end
    n_iv++;
    if (n_iv == 1) base_max = max_act;
    if (n_iv > RUN_INTERVALS - 5) tail_sum += max_act;
  end

  always @(posedge clk) if (rst_n && est_done && shared_on && n_iv >= 2) begin
    for (int i = 0; i < N; i++) if (slowdown_ok[i]) begin
      real est, err;
      est = real'(slowdown[i]) / 256.0;
      err = (est - actual[i]) / actual[i];
      checks++;
      n_est++;
      abs_err_sum += (err < 0.0) ? -err : err;
      if (err > 0.50 || err < -0.50) begin
        failures++;
        $display("FAIL N=%0d interval %0d app %0d: estimate %f measured %f", N, n_iv, i, est, actual[i]);
      end
    end
  end

  int r0;
  initial begin
    enable = '0; finished = 0; checks = 0; failures = 0; base_max = 0.0; final_max = 0.0;
    wait (go);
    for (int i = 0; i < N; i++) begin
      @(negedge clk); enable = N'(1) << i;
      repeat (200) @(negedge clk);
      r0 = done_reqs[i];
      repeat (8000) @(negedge clk);
      alone_cpr[i] = 8000.0 / real'(done_reqs[i] - r0);
      enable = '0;
      repeat (LAT + 20) @(negedge clk);
    end
    // Start sharing exactly at an interval boundary, with equal tickets.
    @(posedge clk iff interval_end);
    @(negedge clk);
    for (int i = 0; i < N; i++) base_reqs[i] = done_reqs[i];
    enable = '1; shared_on = 1;
    wait (n_iv == RUN_INTERVALS);
    repeat (2) @(negedge clk);
    final_max = tail_sum / 5.0;
    $display("N=%0d: max slowdown with equal shares %f, with MISE-Fair (last 5 intervals) %f, bound %f",
             N, base_max, final_max, real'(fair_bound) / 256.0);
    $display("N=%0d: mean absolute estimation error %f over %0d estimates", N, abs_err_sum / n_est, n_est);
    checks++;
    if (abs_err_sum / n_est > 0.25) begin
      failures++;
      $display("FAIL N=%0d: mean estimation error above 25 %%", N);
    end
    checks++;
    if (final_max > base_max) begin
      failures++;
      $display("FAIL N=%0d: MISE-Fair did not lower the maximum slowdown", N);
    end
    finished = 1;
  end
endmodule
