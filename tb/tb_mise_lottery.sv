// tb_mise_lottery: draws many epochs with fixed ticket sets and checks that
// every application wins in proportion to its tickets (within a statistical
// tolerance), that an application without tickets never wins, and that
// unowned tickets are spread by the rotating fallback.  The reference is the
// ticket share itself, not the scheduler's LFSR.
module tb_mise_lottery;
  import mise_pkg::*;
  localparam int N = 4;

  logic clk = 0, rst_n = 0;
  logic draw;
  ticket_t tickets [N];
  logic [1:0] prio_app;
  int checks = 0, failures = 0;

  mise_lottery #(.N_APPS(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int wins [N];
  localparam int DRAWS = 8000;

  task automatic trial(int t0, int t1, int t2, int t3);
    int tk [N];
    int tot;
    real expf, got;
    tk = '{t0, t1, t2, t3};
    tot = t0 + t1 + t2 + t3;
    for (int i = 0; i < N; i++) begin tickets[i] = ticket_t'(tk[i]); wins[i] = 0; end
    for (int d = 0; d < DRAWS; d++) begin
      // gap of a random length between draws, like epochs
      repeat ($urandom_range(0, 3)) @(negedge clk);
      @(negedge clk); draw = 1;
      @(negedge clk); draw = 0;
      wins[prio_app]++;
    end
    for (int i = 0; i < N; i++) begin
      // owned share plus an even part of the unowned tickets
      expf = (real'(tk[i]) + real'(TOTAL_TICKETS - tot) / N) / TOTAL_TICKETS;
      got  = real'(wins[i]) / DRAWS;
      checks++;
      if (got < expf - 0.03 || got > expf + 0.03) begin
        failures++;
        $display("FAIL tickets %0d/%0d/%0d/%0d app %0d: share %f expected %f", t0, t1, t2, t3, i, got, expf);
      end
      if (expf == 0.0) begin
        checks++;
        if (wins[i] != 0) begin failures++; $display("FAIL app %0d without tickets won", i); end
      end
    end
  endtask

  initial begin
    draw = 0;
    for (int i = 0; i < N; i++) tickets[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    trial(25, 25, 25, 25);
    trial(70, 10, 10, 10);
    trial(0, 100, 0, 0);
    trial(40, 0, 20, 0);   // 40 unowned tickets go round robin
    trial(5, 15, 30, 50);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
