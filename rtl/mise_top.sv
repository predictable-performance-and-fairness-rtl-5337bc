// mise_top: MISE slowdown estimation and slowdown-aware bandwidth allocation
// for a memory controller shared by N_APPS applications (one per core).
//
// Time is cut into epochs of EPOCH_CYCLES cycles and intervals of
// EPOCHS_PER_INTERVAL epochs.  At the start of every epoch the lottery
// scheduler hands highest priority to one application, drawn in proportion to
// its ticket allocation.  The request arbiter serves that application's
// requests before all others, so during its epochs it runs almost as if alone.
// Per-application counters measure, over each interval, the requests served
// (shared service rate), the requests served and cycles spent at highest
// priority less interference cycles (alone service rate), and the core's
// memory stall cycles (alpha).  At the end of an interval one slowdown
// estimator computes, application by application,
//     slowdown = (1 - alpha) + alpha * ARSR / SRSR
// and the estimates drive the bandwidth policy selected by `mode`:
//   MODE_QOS  - mise_qos_ctrl sizes the allocation of application `aoi` to
//               keep it under `qos_bound` and flags a bound it cannot meet;
//   MODE_FAIR - mise_fair_ctrl moves bandwidth towards the most slowed-down
//               applications and adapts a common bound (`fair_bound`).
// The new tickets apply from the next epoch draw.
//
// Interfaces: per-application request ports (valid/ready handshake with an
// address), a channel port towards the DRAM command scheduler
// (`mem_valid/mem_ready/mem_app/mem_addr`), a completion port from it
// (`resp_valid/resp_app`, one completion per served request) and one
// memory-stall line per core.  The slowdown estimates and `est_done` are
// outputs, so system software can read them.  The epoch/interval structure
// follows the method; the default lengths (10,000-cycle epochs, 5,000,000-cycle
// intervals) are this design's choice.
module mise_top
  import mise_pkg::*;
#(
  parameter int unsigned N_APPS              = N_APPS_DEF,
  parameter int unsigned ADDR_W              = 32,
  parameter int unsigned EPOCH_CYCLES        = 10000,
  parameter int unsigned EPOCHS_PER_INTERVAL = 500
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // configuration from system software
  input  mode_e                     mode,
  input  logic [$clog2(N_APPS)-1:0] aoi,
  input  sd_t                       qos_bound,
  // requests from the applications
  input  logic [N_APPS-1:0]         req_valid,
  input  logic [ADDR_W-1:0]         req_addr [N_APPS],
  output logic [N_APPS-1:0]         req_ready,
  // towards the memory channel
  output logic                      mem_valid,
  input  logic                      mem_ready,
  output logic [$clog2(N_APPS)-1:0] mem_app,
  output logic [ADDR_W-1:0]         mem_addr,
  input  logic                      resp_valid,
  input  logic [$clog2(N_APPS)-1:0] resp_app,
  // core stall indications
  input  logic [N_APPS-1:0]         core_stall,
  // status
  output logic [$clog2(N_APPS)-1:0] prio_app,
  output logic                      epoch_start,
  output logic                      interval_end,
  output sd_t                       slowdown [N_APPS],
  output logic [N_APPS-1:0]         slowdown_ok,
  output logic                      est_done,
  output ticket_t                   tickets  [N_APPS],
  output logic                      qos_bound_met,
  output logic                      qos_bound_unreachable,
  output sd_t                       fair_bound,
  output logic                      fair_bound_raised
);

  localparam int unsigned AW = $clog2(N_APPS);
  localparam int unsigned INTERVAL_CYCLES = EPOCH_CYCLES * EPOCHS_PER_INTERVAL;

  // ---------------------------------------------------------------- timers
  logic [$clog2(EPOCH_CYCLES+1)-1:0]        ecyc_q;
  logic [$clog2(EPOCHS_PER_INTERVAL+1)-1:0] ecnt_q;
  logic                                     first_q;

  logic epoch_last;
  assign epoch_last   = (ecyc_q == ($bits(ecyc_q))'(EPOCH_CYCLES - 1));
  assign interval_end = epoch_last && (ecnt_q == ($bits(ecnt_q))'(EPOCHS_PER_INTERVAL - 1));
  // Draw for the next epoch on the last cycle of this one (and once after reset).
  assign epoch_start  = epoch_last || first_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ecyc_q  <= '0;
      ecnt_q  <= '0;
      first_q <= 1'b1;
    end else begin
      first_q <= 1'b0;
      if (epoch_last) begin
        ecyc_q <= '0;
        ecnt_q <= interval_end ? '0 : ecnt_q + 1'b1;
      end else begin
        ecyc_q <= ecyc_q + 1'b1;
      end
    end
  end

  // ---------------------------------------------------- priority selection
  ticket_t qos_tickets  [N_APPS];
  ticket_t fair_tickets [N_APPS];

  always_comb
    for (int i = 0; i < N_APPS; i++)
      tickets[i] = (mode == MODE_QOS) ? qos_tickets[i] : fair_tickets[i];

  mise_lottery #(.N_APPS(N_APPS)) u_lottery (
    .clk, .rst_n, .draw(epoch_start), .tickets, .prio_app
  );

  // ------------------------------------------------------------ arbitration
  logic [N_APPS-1:0] intf;

  mise_req_arbiter #(.N_APPS(N_APPS), .ADDR_W(ADDR_W)) u_arb (
    .clk, .rst_n, .prio_app, .req_valid, .req_addr, .req_grant(req_ready),
    .mem_valid, .mem_ready, .mem_app, .mem_addr, .intf
  );

  // ---------------------------------------------------- per-app counters
  app_stats_t        stats [N_APPS];
  logic [N_APPS-1:0] stats_valid;

  for (genvar g = 0; g < N_APPS; g++) begin : g_cnt
    mise_app_counters u_cnt (
      .clk, .rst_n,
      .interval_end,
      .is_prio     (prio_app == AW'(g)),
      .served      (resp_valid && resp_app == AW'(g)),
      .intf        (intf[g]),
      .stall       (core_stall[g]),
      .stats       (stats[g]),
      .stats_valid (stats_valid[g])
    );
  end

  // ------------------------------------------------- slowdown estimation
  logic          est_busy, est_one_done, est_ok;
  sd_t           est_sd;
  logic [AW-1:0] est_idx_q;
  logic          est_run_q, est_go_q;

  mise_slowdown_est u_est (
    .clk, .rst_n,
    .start(est_go_q), .stats(stats[est_idx_q]),
    .interval_cycles(cnt_t'(INTERVAL_CYCLES)),
    .busy(est_busy), .done(est_one_done), .slowdown(est_sd), .est_ok
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      est_idx_q   <= '0;
      est_run_q   <= 1'b0;
      est_go_q    <= 1'b0;
      est_done    <= 1'b0;
      slowdown_ok <= '0;
      for (int i = 0; i < N_APPS; i++) slowdown[i] <= SD_ONE;
    end else begin
      est_go_q <= 1'b0;
      est_done <= 1'b0;
      if (stats_valid[0]) begin
        est_idx_q <= '0;
        est_run_q <= 1'b1;
        est_go_q  <= 1'b1;
      end else if (est_run_q && est_one_done) begin
        slowdown_ok[est_idx_q] <= est_ok;
        if (est_ok) slowdown[est_idx_q] <= est_sd;
        if (est_idx_q == AW'(N_APPS-1)) begin
          est_run_q <= 1'b0;
          est_done  <= 1'b1;
        end else begin
          est_idx_q <= est_idx_q + 1'b1;
          est_go_q  <= 1'b1;
        end
      end
    end
  end

  // ------------------------------------------------------ bandwidth policy
  ticket_t qos_aoi_alloc;
  logic    fair_busy, fair_done;

  mise_qos_ctrl #(.N_APPS(N_APPS)) u_qos (
    .clk, .rst_n, .aoi, .bound(qos_bound),
    .est_valid(est_done && mode == MODE_QOS), .est_ok(slowdown_ok[aoi]),
    .aoi_slowdown(slowdown[aoi]),
    .tickets(qos_tickets), .aoi_alloc(qos_aoi_alloc),
    .bound_met(qos_bound_met), .bound_unreachable(qos_bound_unreachable)
  );

  mise_fair_ctrl #(.N_APPS(N_APPS)) u_fair (
    .clk, .rst_n,
    .est_valid(est_done && mode == MODE_FAIR), .est_ok(slowdown_ok),
    .slowdown, .tickets(fair_tickets), .bound(fair_bound),
    .bound_raised(fair_bound_raised), .busy(fair_busy), .done(fair_done)
  );

  // The estimation of all applications, and the MISE-Fair update that follows
  // it, must finish well inside an interval.
  assert property (@(posedge clk) disable iff (!rst_n) interval_end |-> !est_run_q && !est_busy);
  assert property (@(posedge clk) disable iff (!rst_n) est_done |-> !fair_busy || fair_done);
  // All counter sets snapshot together.
  assert property (@(posedge clk) disable iff (!rst_n) stats_valid == '0 || stats_valid == '1);
  // In QoS mode the application of interest holds the allocation its controller chose.
  assert property (@(posedge clk) disable iff (!rst_n) mode == MODE_QOS |-> tickets[aoi] == qos_aoi_alloc);

  initial assert (INTERVAL_CYCLES < 2**CNT_W && N_APPS >= 2)
    else $error("mise_top: interval too long for the counters");

endmodule
