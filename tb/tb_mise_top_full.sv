// tb_mise_top_full: runs the design at its default sizes (4 applications,
// 10,000-cycle epochs, 5,000,000-cycle intervals) through three complete
// intervals with four behavioural cores sharing one memory channel, under
// MISE-QoS with a tight bound on the most memory-intensive core.  It measures
// every core's alone speed first, then checks that each interval produces a
// slowdown estimate within 20 % of the measured slowdown, that the AoI's
// allocation grows after the first interval, and that priority rotation and
// interference accounting happened.
module tb_mise_top_full;
  import mise_pkg::*;
  localparam int N = 4;
  localparam int AWD = 32;
  localparam int INTERVAL = 10000 * 500;
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

  mise_top dut (.*);

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
    repeat (16_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n_prio_change = 0, n_intf = 0, n_est = 0;
  logic [1:0] last_prio;
  always @(posedge clk) if (rst_n) begin
    if (prio_app != last_prio) n_prio_change++;
    last_prio <= prio_app;
    if (|dut.intf) n_intf++;
  end

  real alone_cpr [N];
  int unsigned base_reqs [N];
  real actual [N];

  always @(posedge clk) if (rst_n && interval_end) begin
    for (int i = 0; i < N; i++) begin
      actual[i] = alone_cpr[i] * real'(done_reqs[i] - base_reqs[i]) / real'(INTERVAL);
      actual[i] = (actual[i] > 0.0) ? 1.0 / actual[i] : 0.0;
      base_reqs[i] = done_reqs[i];
    end
  end
  always @(posedge clk) if (rst_n && est_done) begin
    n_est++;
    // The first interval includes the alone runs: judge the later ones.
    if (n_est >= 2)
      for (int i = 0; i < N; i++) if (slowdown_ok[i]) begin
        real est, err;
        est = real'(slowdown[i]) / 256.0;
        err = (est - actual[i]) / actual[i];
        $display("app %0d: estimate %f measured %f", i, est, actual[i]);
        checks++;
        if (err > 0.20 || err < -0.20) begin
          failures++; $display("FAIL accuracy app %0d", i);
        end
      end
  end

  task automatic expect_true(string what, logic cond);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  int r0;
  ticket_t alloc1;
  initial begin
    mode = MODE_QOS; aoi = 0; qos_bound = 16'h0108; enable = '0;
    think = '{4, 25, 60, 300};
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < N; i++) begin
      @(negedge clk); enable = N'(1) << i;
      repeat (200) @(negedge clk);
      r0 = done_reqs[i];
      repeat (30000) @(negedge clk);
      alone_cpr[i] = 30000.0 / real'(done_reqs[i] - r0);
      enable = '0;
      repeat (LAT + 20) @(negedge clk);
    end
    enable = '1;
    @(posedge est_done);
    repeat (2) @(negedge clk);
    alloc1 = tickets[0];
    expect_true("QoS: allocation grew after a missed bound", alloc1 > ticket_t'(TOTAL_TICKETS / N));
    repeat (2) begin
      @(posedge est_done);
      repeat (2) @(negedge clk);
    end
    expect_true("QoS: allocation grew again", tickets[0] > alloc1);
    expect_true("priority rotation", n_prio_change > 0);
    expect_true("interference accounting", n_intf > 0);
    $display("prio_changes=%0d intf_cycles=%0d alloc=%0d", n_prio_change, n_intf, tickets[0]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
