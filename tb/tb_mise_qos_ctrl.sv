// tb_mise_qos_ctrl: feeds a sequence of AoI slowdown estimates to the MISE-QoS
// controller and checks, against a reference of the step rule, the AoI's
// allocation, the others' equal shares, bound_met and bound_unreachable.  The
// sequence first drives the allocation up to "always prioritise" with the
// bound still missed (unreachable must rise), then down to the floor.
module tb_mise_qos_ctrl;
  import mise_pkg::*;
  localparam int N = 4;

  logic clk = 0, rst_n = 0;
  logic [1:0] aoi;
  sd_t bound, aoi_slowdown;
  logic est_valid, est_ok;
  ticket_t tickets [N];
  ticket_t aoi_alloc;
  logic bound_met, bound_unreachable;
  int checks = 0, failures = 0;
  int n_up = 0, n_down = 0, n_unreach = 0;

  mise_qos_ctrl #(.N_APPS(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int alloc, share;
  logic exp_met, exp_unr;

  task automatic step(int sd_fx, logic ok);
    @(negedge clk);
    aoi_slowdown = sd_t'(sd_fx); est_ok = ok; est_valid = 1;
    if (ok) begin
      exp_met = (sd_fx <= int'(bound));
      exp_unr = (sd_fx > int'(bound)) && (alloc == 100);
      if (sd_fx > int'(bound)) begin alloc = (alloc + 10 > 100) ? 100 : alloc + 10; n_up++; end
      else if (sd_fx < int'(bound)) begin alloc = (alloc - 10 < 10) ? 10 : alloc - 10; n_down++; end
      if (exp_unr) n_unreach++;
    end
    @(negedge clk);
    est_valid = 0;
    share = (100 - alloc) / (N - 1);
    checks++;
    if (aoi_alloc != ticket_t'(alloc)) begin failures++; $display("FAIL alloc %0d exp %0d", aoi_alloc, alloc); end
    for (int i = 0; i < N; i++) begin
      checks++;
      if (tickets[i] != ticket_t'(i == aoi ? alloc : share)) begin
        failures++; $display("FAIL tickets[%0d]=%0d", i, tickets[i]);
      end
    end
    checks += 2;
    if (bound_met != exp_met) begin failures++; $display("FAIL bound_met"); end
    if (bound_unreachable != exp_unr) begin failures++; $display("FAIL bound_unreachable"); end
  endtask

  initial begin
    est_valid = 0; est_ok = 0; aoi_slowdown = SD_ONE;
    aoi = 2'd2; bound = 16'h0200;              // bound 2.0
    alloc = 25; exp_met = 1; exp_unr = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 10; k++) step(16'h0280, 1);   // 2.5 > 2.0: climb to 100, then unreachable
    step(16'h0200, 1);                               // exactly at bound: hold
    step(16'h0300, 0);                               // no valid estimate: no change
    for (int k = 0; k < 12; k++) step(16'h0140, 1);   // 1.25 < 2.0: fall to the floor
    for (int k = 0; k < 20; k++) step($urandom_range(16'h0100, 16'h0300), 1);
    checks++;
    if (n_up == 0 || n_down == 0 || n_unreach == 0) begin failures++; $display("FAIL coverage"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
