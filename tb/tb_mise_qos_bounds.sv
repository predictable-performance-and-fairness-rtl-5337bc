// tb_mise_qos_bounds: the MISE-QoS slowdown-bound sweep.  A memory-intensive
// application of interest (core 0) shares the memory channel with three
// lighter cores.  For each bound 10/n, n = 1..10, the design is reset and run
// for CONVERGE intervals, then measured over MEASURE intervals.  As the
// always-prioritise baseline the same run is made with a bound of 1.0, which
// no estimate can get under, so the AoI's allocation climbs to all the
// bandwidth and stays there.  Checks:
//   * the AoI's final allocation does not shrink as the bound tightens (one
//     step of slack for noise);
//   * wherever the baseline meets a bound, MISE-QoS also meets it (measured
//     AoI slowdown within 5 % of the bound);
//   * the bound_met flag agrees with the measured AoI slowdown in at least
//     80 % of the measured intervals;
//   * with the loosest bounds the other cores run faster than under the
//     baseline (higher harmonic speedup).
module tb_mise_qos_bounds;
  import mise_pkg::*;
  localparam int N = 4;
  localparam int AWD = 32;
  localparam int EPOCH = 1000;
  localparam int EPI = 40;
  localparam int INTERVAL = EPOCH * EPI;
  localparam int LAT = 10;
  localparam int CONVERGE = 12;
  localparam int MEASURE = 4;

  logic clk = 0, rst_n = 0;
  sd_t qos_bound;
  logic [N-1:0] req_valid, req_ready, core_stall, slowdown_ok;
  logic [AWD-1:0] req_addr [N];
  logic mem_valid, mem_ready, resp_valid;
  logic [1:0] mem_app, resp_app, prio_app;
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
    .clk, .rst_n, .mode(MODE_QOS), .aoi(2'd0), .qos_bound,
    .req_valid, .req_addr, .req_ready, .mem_valid, .mem_ready, .mem_app, .mem_addr,
    .resp_valid, .resp_app, .core_stall, .prio_app, .epoch_start, .interval_end,
    .slowdown, .slowdown_ok, .est_done, .tickets, .qos_bound_met, .qos_bound_unreachable,
    .fair_bound, .fair_bound_raised
  );

  mem_channel_model #(.N_APPS(N), .LAT(LAT)) u_mem (
    .clk, .rst_n, .mem_valid, .mem_ready, .mem_app, .resp_valid, .resp_app
  );

  for (genvar g = 0; g < N; g++) begin : g_core
    core_model #(.ID(g), .N_APPS(N), .ADDR_W(AWD)) u_core (
      .clk, .rst_n, .enable(enable[g]), .think(think[g]),
      .req_valid(req_valid[g]), .req_addr(req_addr[g]), .req_ready(req_ready[g]),
      .resp_valid, .resp_app, .stall(core_stall[g]), .done_reqs(done_reqs[g])
    );
  end

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    repeat (12_000_000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  task automatic expect_true(string what, logic cond);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  real alone_cpr [N];
  int unsigned base_reqs [N];
  real actual [N];
  logic measuring = 0;
  int  n_meas, n_agree;
  real aoi_sum, hs_sum;

  always @(posedge clk) if (rst_n && interval_end) begin
    for (int i = 0; i < N; i++) begin
      actual[i] = alone_cpr[i] * real'(done_reqs[i] - base_reqs[i]) / real'(INTERVAL);
      actual[i] = (actual[i] > 0.0) ? 1.0 / actual[i] : 0.0;
      base_reqs[i] = done_reqs[i];
    end
    if (measuring) begin
      real hs;
      hs = 0.0;
      for (int i = 1; i < N; i++) hs += actual[i];
      hs_sum  += real'(N - 1) / hs;            // harmonic speedup of the others
      aoi_sum += actual[0];
    end
  end
  // The estimate of an interval lands a few hundred cycles after its end.
  always @(posedge clk) if (rst_n && est_done && measuring) begin
    n_meas++;
    if ((actual[0] <= real'(qos_bound) / 256.0) == (slowdown[0] <= qos_bound)) n_agree++;
  end

  task automatic run(sd_t bound, output real aoi_sd, output real hs, output int alloc);
    rst_n = 0;
    qos_bound = bound;
    repeat (3) @(negedge clk);
    rst_n = 1;
    enable = '1;
    for (int i = 0; i < N; i++) base_reqs[i] = 0;
    repeat (CONVERGE) @(posedge clk iff est_done);
    aoi_sum = 0.0; hs_sum = 0.0; n_meas = 0; n_agree = 0;
    @(posedge clk iff interval_end);
    measuring = 1;
    repeat (MEASURE) @(posedge clk iff est_done);
    @(negedge clk);
    measuring = 0;
    aoi_sd = aoi_sum / MEASURE;
    hs     = hs_sum / MEASURE;
    alloc  = tickets[0];
  endtask

  real ap_sd, ap_hs, sd_n [11], hs_n [11];
  int  ap_alloc, alloc_n [11];
  int  tot_meas = 0, tot_agree = 0;
  int r0;
  initial begin
    qos_bound = SD_ONE; enable = '0;
    think = '{3, 20, 60, 150};
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < N; i++) begin
      @(negedge clk); enable = N'(1) << i;
      repeat (200) @(negedge clk);
      r0 = done_reqs[i];
      repeat (10000) @(negedge clk);
      alone_cpr[i] = 10000.0 / real'(done_reqs[i] - r0);
      enable = '0;
      repeat (LAT + 20) @(negedge clk);
    end
    // Always-prioritise baseline.
    run(SD_ONE, ap_sd, ap_hs, ap_alloc);
    $display("AlwaysPrioritize: AoI slowdown %f, others' harmonic speedup %f, allocation %0d", ap_sd, ap_hs, ap_alloc);
    expect_true("baseline holds all the bandwidth", ap_alloc == TOTAL_TICKETS);
    for (int n = 1; n <= 10; n++) begin
      sd_t b;
      b = sd_t'((10 * 256) / n);
      run(b, sd_n[n], hs_n[n], alloc_n[n]);
      tot_meas += n_meas; tot_agree += n_agree;
      $display("MISE-QoS-%0d (bound %f): AoI slowdown %f, others' harmonic speedup %f, allocation %0d",
               n, real'(b) / 256.0, sd_n[n], hs_n[n], alloc_n[n]);
      if (n > 1) expect_true($sformatf("allocation does not shrink at n=%0d", n), alloc_n[n] + 10 >= alloc_n[n-1]);
      if (ap_sd <= real'(b) / 256.0)
        expect_true($sformatf("bound met at n=%0d where the baseline meets it", n), sd_n[n] <= 1.05 * real'(b) / 256.0);
    end
    $display("bound_met prediction agreed with measurement in %0d of %0d intervals", tot_agree, tot_meas);
    expect_true("bound prediction accuracy >= 80 %", tot_agree * 5 >= tot_meas * 4);
    expect_true("others faster than under the baseline with a loose bound", hs_n[3] > ap_hs);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
