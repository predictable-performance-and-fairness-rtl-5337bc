// tb_mise_fair_ctrl: gives the MISE-Fair controller rounds of slowdown
// estimates and checks its bound and new ticket allocation against a reference
// model of the update rule written in integer arithmetic:
//   need_i = (tickets_i * sd_i << 8) / B, raise B if sum(need) > 100 << 8,
//   lower B if max(sd) + step <= B, tickets_i = 2 + need_i * 92 / sum(need).
// It also checks that more-slowed-down applications end with more tickets and
// that the bound rises and falls at least once.
module tb_mise_fair_ctrl;
  import mise_pkg::*;
  localparam int N = 4;

  logic clk = 0, rst_n = 0;
  logic est_valid, busy, done, bound_raised;
  logic [N-1:0] est_ok;
  sd_t slowdown [N];
  ticket_t tickets [N];
  sd_t bound;
  int checks = 0, failures = 0;
  int n_raise = 0, n_lower = 0;

  mise_fair_ctrl #(.N_APPS(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint m_tk [N];
  longint m_b;
  int lat;

  task automatic round(int s0, int s1, int s2, int s3, logic [N-1:0] ok);
    longint sd [N];
    longint need [N];
    longint sum, mx;
    sd = '{s0, s1, s2, s3};
    sum = 0; mx = 0;
    for (int i = 0; i < N; i++) begin
      need[i] = ok[i] ? (m_tk[i] * sd[i] * 256) / m_b : m_tk[i] * 256;
      sum += need[i];
      if (ok[i] && sd[i] > mx) mx = sd[i];
    end
    if (sum > 100 * 256) begin m_b = m_b + 32; n_raise++; end
    else if (mx + 32 <= m_b) begin m_b = (m_b < 256 + 32) ? 256 : m_b - 32; n_lower++; end
    for (int i = 0; i < N; i++) m_tk[i] = 2 + (need[i] * 92) / sum;
    @(negedge clk);
    for (int i = 0; i < N; i++) slowdown[i] = sd_t'(sd[i]);
    est_ok = ok; est_valid = 1;
    @(negedge clk); est_valid = 0;
    lat = 0;
    while (!done) begin @(negedge clk); lat++; end
    checks++;
    if (bound != sd_t'(m_b)) begin failures++; $display("FAIL bound %h exp %h", bound, m_b); end
    for (int i = 0; i < N; i++) begin
      checks++;
      if (tickets[i] != ticket_t'(m_tk[i])) begin
        failures++; $display("FAIL tickets[%0d] %0d exp %0d", i, tickets[i], m_tk[i]);
      end
    end
  endtask

  initial begin
    est_valid = 0; est_ok = '0;
    for (int i = 0; i < N; i++) begin slowdown[i] = SD_ONE; m_tk[i] = 25; end
    m_b = 512;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // App 3 badly slowed down, others mildly: bandwidth moves to app 3.
    round(16'h0120, 16'h0140, 16'h0130, 16'h0400, 4'hF);
    checks++;
    if (!(tickets[3] > tickets[0] && tickets[3] > tickets[1] && tickets[3] > tickets[2])) begin
      failures++; $display("FAIL most-slowed app did not gain bandwidth");
    end
    // Everyone far above the bound: bound must rise.
    round(16'h0500, 16'h0500, 16'h0500, 16'h0500, 4'hF);
    // Everyone near 1.0: bound easily met, must fall.
    for (int k = 0; k < 4; k++) round(16'h0108, 16'h0110, 16'h0104, 16'h0100, 4'hF);
    // A round with a missing estimate.
    round(16'h0300, 16'h0100, 16'h0200, 16'h0100, 4'b1011);
    for (int k = 0; k < 20; k++)
      round($urandom_range(256, 1500), $urandom_range(256, 1500),
            $urandom_range(256, 1500), $urandom_range(256, 1500), 4'($urandom_range(1, 15)));
    checks++;
    if (n_raise == 0 || n_lower == 0) begin failures++; $display("FAIL coverage"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
