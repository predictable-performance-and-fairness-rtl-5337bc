// tb_mise_top: end-to-end test of the slowdown-estimation and bandwidth-policy
// logic with four behavioural cores and a one-request-at-a-time memory
// channel, at short epochs (100 cycles) and intervals (40 epochs).
//
// 1. Each core runs alone for a while; its cycles per completed request give
//    its alone performance.
// 2. All four cores run together.  At every interval the measured slowdown of
//    each core (alone cycles per request over shared cycles per request) is
//    compared with the estimate the design produced for that interval; the
//    estimate must be within 20 %.
// 3. The policies are exercised in turn: MISE-QoS with a tight bound on a
//    memory-intensive core (its allocation must climb to all the bandwidth and
//    the bound be reported unreachable), MISE-QoS with a loose bound on a light
//    core (its allocation must fall), then MISE-Fair (the bound must move and
//    the most slowed-down core must end with the most tickets), and MISE-Fair
//    with every core memory-intensive (the bound must rise).
// Every mechanism is counted and a mechanism that never happened is a failure.
module tb_mise_top;
  import mise_pkg::*;
  localparam int N = 4;
  localparam int AWD = 32;
  localparam int EPOCH = 100;
  localparam int EPI = 40;
  localparam int INTERVAL = EPOCH * EPI;
  localparam int LAT = 8;

  logic clk = 0, rst_n = 0;
  mode_e mode;
  logic [1:0] aoi;
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

  mise_top #(.N_APPS(N), .ADDR_W(AWD), .EPOCH_CYCLES(EPOCH), .EPOCHS_PER_INTERVAL(EPI)) dut (.*);

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
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------- mechanism counters
  int n_prio_change = 0, n_intf = 0, n_est = 0, n_noest = 0, n_qos_up = 0, n_qos_down = 0;
  int n_unreach = 0, n_fair_raise = 0, n_fair_lower = 0, n_mode_switch = 0, n_acc = 0;
  logic [1:0] last_prio;
  sd_t last_fb;
  ticket_t last_alloc;
  mode_e last_mode;
  always @(posedge clk) if (rst_n) begin
    if (prio_app != last_prio) n_prio_change++;
    last_prio <= prio_app;
    if (|dut.intf) n_intf++;
    if (est_done) begin
      n_est++;
      if (slowdown_ok != '1) n_noest++;
    end
    if (qos_bound_unreachable && est_done) n_unreach++;
    if (fair_bound_raised) n_fair_raise++;
    if (fair_bound < last_fb) n_fair_lower++;
    last_fb <= fair_bound;
    if (mode == MODE_QOS) begin
      if (tickets[aoi] > last_alloc) n_qos_up++;
      if (tickets[aoi] < last_alloc) n_qos_down++;
    end
    last_alloc <= tickets[aoi];
    if (mode != last_mode) n_mode_switch++;
    last_mode <= mode;
  end

  // ----------------------------------------------------- accuracy checking
  real alone_cpr [N];
  int unsigned base_reqs [N];
  real actual [N];
  logic acc_on = 0;

  // Snapshot real progress at each interval end, compare when the estimate lands.
  always @(posedge clk) if (rst_n && interval_end) begin
    for (int i = 0; i < N; i++) begin
      actual[i] = alone_cpr[i] * real'(done_reqs[i] - base_reqs[i]) / real'(INTERVAL);
      actual[i] = (actual[i] > 0.0) ? 1.0 / actual[i] : 0.0;
      base_reqs[i] = done_reqs[i];
    end
  end
  always @(posedge clk) if (rst_n && est_done && acc_on) begin
    for (int i = 0; i < N; i++) if (slowdown_ok[i]) begin
      real est, err;
      est = real'(slowdown[i]) / 256.0;
      err = (est - actual[i]) / actual[i];
      checks++; n_acc++;
      if (err > 0.20 || err < -0.20) begin
        failures++;
        $display("FAIL accuracy app %0d: estimate %f actual %f", i, est, actual[i]);
      end
      if (n_acc % 16 == 0) $display("app %0d: estimate %f actual %f", i, est, actual[i]);
    end
  end

  task automatic intervals(int k);
    repeat (k) @(posedge est_done);
    repeat (2) @(negedge clk);
  endtask

  task automatic expect_true(string what, logic cond);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  int r0;
  sd_t fb0;
  initial begin
    mode = MODE_FAIR; aoi = 0; qos_bound = 16'h0200; enable = '0;
    think = '{4, 25, 60, 300};
    repeat (3) @(posedge clk);
    rst_n = 1;
    // ---- 1. alone runs
    for (int i = 0; i < N; i++) begin
      @(negedge clk); enable = N'(1) << i;
      repeat (200) @(negedge clk);
      r0 = done_reqs[i];
      repeat (12000) @(negedge clk);
      alone_cpr[i] = 12000.0 / real'(done_reqs[i] - r0);
      $display("app %0d alone: %f cycles per request", i, alone_cpr[i]);
      enable = '0;
      repeat (LAT + 20) @(negedge clk);
    end
    // ---- 2/3a. shared, MISE-QoS, tight bound on the heaviest core
    mode = MODE_QOS; aoi = 0; qos_bound = 16'h0108;   // 1.03
    enable = '1;
    intervals(2);
    acc_on = 1;
    intervals(10);
    expect_true("QoS: allocation reached all the bandwidth", tickets[0] == ticket_t'(TOTAL_TICKETS));
    expect_true("QoS: unreachable bound reported", qos_bound_unreachable);
    // ---- 3b. loose bound on a light core
    aoi = 3; qos_bound = 16'h0400;                     // 4.0
    intervals(12);
    expect_true("QoS: light core dropped to the floor", tickets[3] == ticket_t'(10));
    expect_true("QoS: bound met", qos_bound_met && !qos_bound_unreachable);
    // ---- 3c. MISE-Fair
    mode = MODE_FAIR;
    intervals(14);
    begin
      int worst;
      worst = 0;
      for (int i = 1; i < N; i++) if (slowdown[i] > slowdown[worst]) worst = i;
      for (int i = 0; i < N; i++)
        if (i != worst) expect_true("Fair: most slowed-down core has most tickets", tickets[worst] >= tickets[i]);
    end
    // ---- 3d. MISE-Fair with every core memory-intensive: the bound cannot
    //          be met and must rise.  (Alone rates differ now: no accuracy check.)
    acc_on = 0;
    think = '{2, 3, 2, 3};
    fb0 = fair_bound;
    intervals(6);
    expect_true("Fair: bound raised under heavy load", fair_bound > fb0);
    $display("mechanisms: prio_change=%0d intf_cycles=%0d est_rounds=%0d no_estimate_rounds=%0d qos_up=%0d qos_down=%0d unreachable=%0d fair_raise=%0d fair_lower=%0d mode_switch=%0d accuracy_checks=%0d",
             n_prio_change, n_intf, n_est, n_noest, n_qos_up, n_qos_down, n_unreach, n_fair_raise, n_fair_lower, n_mode_switch, n_acc);
    expect_true("mechanism: priority rotation", n_prio_change > 0);
    expect_true("mechanism: interference cycles", n_intf > 0);
    expect_true("mechanism: estimation rounds", n_est > 0);
    expect_true("mechanism: QoS allocation increase", n_qos_up > 0);
    expect_true("mechanism: QoS allocation decrease", n_qos_down > 0);
    expect_true("mechanism: QoS unreachable detection", n_unreach > 0);
    expect_true("mechanism: Fair bound raised", n_fair_raise > 0);
    expect_true("mechanism: Fair bound lowered", n_fair_lower > 0);
    expect_true("mechanism: mode switch", n_mode_switch > 0);
    expect_true("mechanism: kept estimate without priority samples", n_noest > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
