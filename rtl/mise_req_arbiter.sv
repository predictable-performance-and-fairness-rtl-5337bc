// mise_req_arbiter: chooses which application's request goes to the memory
// channel next, giving the highest-priority application absolute precedence
// and treating all the others alike (round robin among them).  The method
// only asks that "one application [holds] the highest priority at any point in
// time, while treating other applications' requests similarly"; round robin
// for the others is this design's choice, standing in for the controller's
// usual scheduler.
//
// Interface: each application i presents a request (`req_valid[i]`,
// `req_addr[i]`); the arbiter forwards one to the channel with a valid/ready
// handshake (`mem_valid`, `mem_ready`, `mem_app`, `mem_addr`) and tells the
// winner in the same cycle through `req_grant[i]`.  `req_addr[i]` must stay
// stable while `req_valid[i]` is high and not granted.
//
// It also produces, per application, the interference indication the slowdown
// counters need: `intf[i]` is high when i holds highest priority, has a request
// waiting and the channel cannot take it because it is still busy with a
// request issued for another application (`busy_app`, the owner of the last
// issued request).  Timing: purely combinational grant; the round-robin
// pointer and `busy_app` update on the clock after a transfer.
module mise_req_arbiter
  import mise_pkg::*;
#(
  parameter int unsigned N_APPS = N_APPS_DEF,
  parameter int unsigned ADDR_W = 32
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [$clog2(N_APPS)-1:0] prio_app,
  input  logic [N_APPS-1:0]         req_valid,
  input  logic [ADDR_W-1:0]         req_addr [N_APPS],
  output logic [N_APPS-1:0]         req_grant,
  output logic                      mem_valid,
  input  logic                      mem_ready,
  output logic [$clog2(N_APPS)-1:0] mem_app,
  output logic [ADDR_W-1:0]         mem_addr,
  output logic [N_APPS-1:0]         intf
);

  localparam int unsigned AW = $clog2(N_APPS);

  logic [AW-1:0] rr_q;        // next non-priority application to favour
  logic [AW-1:0] busy_app_q;  // owner of the last request sent to the channel

  logic [AW-1:0] sel;
  logic          any;
  always_comb begin
    any = |req_valid;
    sel = prio_app;
    if (!req_valid[prio_app]) begin
      // Round robin over the others, starting at rr_q.
      for (int k = N_APPS - 1; k >= 0; k--)
        if (req_valid[(int'(rr_q) + k) % N_APPS] && AW'((int'(rr_q) + k) % N_APPS) != prio_app)
          sel = AW'((int'(rr_q) + k) % N_APPS);
    end
  end

  always_comb begin
    mem_valid = any;
    mem_app   = sel;
    mem_addr  = req_addr[sel];
    req_grant = '0;
    if (any && mem_ready) req_grant[sel] = 1'b1;
    for (int i = 0; i < N_APPS; i++)
      intf[i] = (AW'(i) == prio_app) && req_valid[i] && !mem_ready
                && (busy_app_q != AW'(i));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rr_q       <= '0;
      busy_app_q <= '0;
    end else if (mem_valid && mem_ready) begin
      busy_app_q <= sel;
      if (sel != prio_app || !req_valid[prio_app])
        rr_q <= (sel == AW'(N_APPS-1)) ? '0 : sel + 1'b1;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) $onehot0(req_grant));
  assert property (@(posedge clk) disable iff (!rst_n)
                   (req_valid[prio_app] && mem_ready) |-> req_grant[prio_app]);

endmodule
