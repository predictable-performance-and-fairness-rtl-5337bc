// tb_mise_req_arbiter: random request patterns against a reference model of
// the policy: the highest-priority application is served first whenever it
// has a request; otherwise the requesters other than it are served round robin
// starting after the last one served.  Checks grant, channel fields and the
// interference indication every cycle.
module tb_mise_req_arbiter;
  import mise_pkg::*;
  localparam int N = 4;
  localparam int AWD = 16;

  logic clk = 0, rst_n = 0;
  logic [1:0] prio_app;
  logic [N-1:0] req_valid, req_grant, intf;
  logic [AWD-1:0] req_addr [N];
  logic mem_valid, mem_ready;
  logic [1:0] mem_app;
  logic [AWD-1:0] mem_addr;
  int checks = 0, failures = 0;
  int prio_grants = 0, rr_grants = 0, intf_seen = 0;

  mise_req_arbiter #(.N_APPS(N), .ADDR_W(AWD)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int rr, busy_app, exp_sel;
  logic [N-1:0] exp_intf;
  initial begin
    prio_app = 0; req_valid = '0; mem_ready = 0;
    for (int i = 0; i < N; i++) req_addr[i] = '0;
    rr = 0; busy_app = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 20000; c++) begin
      @(negedge clk);
      if ($urandom_range(0, 50) == 0) prio_app = 2'($urandom_range(0, N-1));
      req_valid = 4'($urandom_range(0, 15));
      mem_ready = ($urandom_range(0, 2) != 0);
      for (int i = 0; i < N; i++) req_addr[i] = AWD'($urandom);
      #1;
      // reference selection
      exp_sel = -1;
      if (req_valid[prio_app]) exp_sel = prio_app;
      else
        for (int k = 0; k < N; k++)
          if (exp_sel < 0 && req_valid[(rr + k) % N] && (rr + k) % N != prio_app)
            exp_sel = (rr + k) % N;
      for (int i = 0; i < N; i++)
        exp_intf[i] = (i == prio_app) && req_valid[i] && !mem_ready && (busy_app != i);
      checks++;
      if (mem_valid != (exp_sel >= 0)) begin failures++; $display("FAIL mem_valid c=%0d", c); end
      if (exp_sel >= 0) begin
        checks++;
        if (mem_app != 2'(exp_sel) || mem_addr != req_addr[exp_sel]) begin
          failures++; $display("FAIL select c=%0d got %0d exp %0d", c, mem_app, exp_sel);
        end
        checks++;
        if (req_grant != (mem_ready ? 4'(1 << exp_sel) : 4'b0)) begin
          failures++; $display("FAIL grant c=%0d", c);
        end
      end
      checks++;
      if (intf != exp_intf) begin failures++; $display("FAIL intf c=%0d got %b exp %b", c, intf, exp_intf); end
      if (|intf) intf_seen++;
      if (exp_sel >= 0 && mem_ready) begin
        busy_app = exp_sel;
        if (exp_sel == prio_app) prio_grants++;
        else begin rr_grants++; rr = (exp_sel + 1) % N; end
      end
    end
    checks++;
    if (prio_grants == 0 || rr_grants == 0 || intf_seen == 0) begin
      failures++; $display("FAIL coverage %0d %0d %0d", prio_grants, rr_grants, intf_seen);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
