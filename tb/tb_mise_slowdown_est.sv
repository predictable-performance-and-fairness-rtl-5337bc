// tb_mise_slowdown_est: feeds counter snapshots to the slowdown estimator and
// compares its Q8.8 result with the MISE formula evaluated in real arithmetic
// ((1 - alpha) + alpha * ARSR / SRSR, clamped to [1, 255.996]), allowing one
// LSB for truncation.  Also checks the two special cases (no request served,
// no highest-priority cycle) and the latency of one estimate.
module tb_mise_slowdown_est;
  import mise_pkg::*;

  logic clk = 0, rst_n = 0;
  logic start, busy, done, est_ok;
  app_stats_t stats;
  cnt_t interval_cycles;
  sd_t slowdown;
  int checks = 0, failures = 0;

  mise_slowdown_est dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(output int lat);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    lat = 1;
    while (!done) begin @(negedge clk); lat++; end
  endtask

  function automatic int model(app_stats_t s, int unsigned iv);
    real arsr, srsr, alpha, sd;
    arsr  = real'(s.hp_served) / real'(s.hp_cycles - s.intf_cycles);
    srsr  = real'(s.served) / real'(iv);
    alpha = real'(s.stall_cycles) / real'(iv);
    sd    = (1.0 - alpha) + alpha * arsr / srsr;
    if (sd < 1.0) sd = 1.0;
    if (sd > 255.99) return 65535;
    return int'($floor(sd * 256.0));
  endfunction

  int lat, exp_sd, diff, max_lat;
  initial begin
    start = 0; stats = '0; interval_cycles = 24'd100000;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // A hand-worked case: alpha = 0.5, ARSR = 0.1, SRSR = 0.05 -> 1.5.
    stats.served = 5000; stats.hp_cycles = 21000; stats.intf_cycles = 1000;
    stats.hp_served = 2000; stats.stall_cycles = 50000;
    run(lat);
    checks++; if (slowdown != 16'h0180 || !est_ok) begin failures++; $display("FAIL hand case %h", slowdown); end
    checks++; if (lat != 2 * 64 + 6) begin failures++; $display("FAIL latency %0d", lat); end
    // No request served: slowdown exactly 1.
    stats = '0; stats.hp_cycles = 500; stats.stall_cycles = 10;
    run(lat);
    checks++; if (slowdown != SD_ONE || !est_ok) begin failures++; $display("FAIL idle case"); end
    // No clean highest-priority cycle: no estimate.
    stats.served = 10; stats.hp_cycles = 300; stats.intf_cycles = 300;
    run(lat);
    checks++; if (est_ok) begin failures++; $display("FAIL no-hp case"); end
    // Random cases.
    max_lat = 0;
    for (int t = 0; t < 300; t++) begin
      interval_cycles  = 24'($urandom_range(10000, 5000000));
      stats.served     = 24'($urandom_range(1, interval_cycles / 10));
      stats.hp_cycles  = 24'($urandom_range(100, interval_cycles / 2));
      stats.intf_cycles= 24'($urandom_range(0, stats.hp_cycles / 4));
      stats.hp_served  = 24'($urandom_range(0, (stats.hp_cycles - stats.intf_cycles) / 4));
      stats.stall_cycles = 24'($urandom_range(0, interval_cycles));
      run(lat);
      exp_sd = model(stats, interval_cycles);
      diff = int'(slowdown) - exp_sd;
      checks++;
      if (!est_ok || diff > 1 || diff < -1) begin
        failures++;
        $display("FAIL t=%0d got %0d exp %0d", t, slowdown, exp_sd);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
