// tb_mise_fair_scaling: the core-count scaling experiment for MISE-Fair, run
// with 4, 8 and 16 cores (synthetic cores of graded memory intensity, one
// memory channel).  Each size runs in its own fair_scaling_run instance; the
// test checks the accuracy of the estimates and that MISE-Fair brings the
// maximum slowdown below what equal bandwidth shares give.
module tb_mise_fair_scaling;
  logic clk = 0, rst_n = 0, go = 0;
  logic fin [3];
  int   chk [3];
  int   fl  [3];
  real  bmax [3];
  real  fmax [3];
  int checks, failures;

  fair_scaling_run #(.N(4))  r4  (.clk, .rst_n, .go, .finished(fin[0]), .checks(chk[0]), .failures(fl[0]), .base_max(bmax[0]), .final_max(fmax[0]));
  fair_scaling_run #(.N(8))  r8  (.clk, .rst_n, .go, .finished(fin[1]), .checks(chk[1]), .failures(fl[1]), .base_max(bmax[1]), .final_max(fmax[1]));
  fair_scaling_run #(.N(16)) r16 (.clk, .rst_n, .go, .finished(fin[2]), .checks(chk[2]), .failures(fl[2]), .base_max(bmax[2]), .final_max(fmax[2]));

  always #5 clk = ~clk;

  initial begin
    repeat (4_000_000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", chk[0] + chk[1] + chk[2], fl[0] + fl[1] + fl[2] + 1);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    go = 1;
    wait (fin[0] && fin[1] && fin[2]);
    checks   = chk[0] + chk[1] + chk[2];
    failures = fl[0] + fl[1] + fl[2];
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
