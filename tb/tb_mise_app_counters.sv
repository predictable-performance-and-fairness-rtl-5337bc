// tb_mise_app_counters: drives random event streams into one counter set,
// keeps its own reference counts and checks the snapshot taken at every
// interval end, plus the one-cycle stats_valid pulse and the restart at zero.
module tb_mise_app_counters;
  import mise_pkg::*;

  logic clk = 0, rst_n = 0;
  logic interval_end, is_prio, served, intf, stall;
  app_stats_t stats;
  logic stats_valid;
  int checks = 0, failures = 0;

  mise_app_counters dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int unsigned r_served, r_hp, r_hps, r_intf, r_stall;
  int unsigned len;

  task automatic check(string what, int unsigned got, int unsigned exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    {interval_end, is_prio, served, intf, stall} = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int iv = 0; iv < 8; iv++) begin
      len = 50 + $urandom_range(0, 300);
      r_served = 0; r_hp = 0; r_hps = 0; r_intf = 0; r_stall = 0;
      for (int c = 0; c < len; c++) begin
        @(negedge clk);
        is_prio      = ($urandom_range(0, 3) == 0);
        served       = ($urandom_range(0, 2) == 0);
        intf         = ($urandom_range(0, 1) == 0);
        stall        = ($urandom_range(0, 1) == 0);
        interval_end = (c == len - 1);
        r_served += served;
        r_hp     += is_prio;
        r_hps    += is_prio & served;
        r_intf   += is_prio & intf;
        r_stall  += stall;
        // stats_valid is a pulse of the previous interval end only
        checks++;
        if (stats_valid !== 1'b0) begin
          failures++;
          $display("FAIL stats_valid at c=%0d iv=%0d", c, iv);
        end
      end
      @(negedge clk);
      interval_end = 0; {is_prio, served, intf, stall} = '0;
      check("stats_valid", stats_valid, 1);
      check("served",  stats.served,       r_served);
      check("hp",      stats.hp_cycles,    r_hp);
      check("hp_srv",  stats.hp_served,    r_hps);
      check("intf",    stats.intf_cycles,  r_intf);
      check("stall",   stats.stall_cycles, r_stall);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
