// core_model: behavioural stand-in for one processor core running a simple
// program: `think` cycles of computation, then one memory request, and the
// core stalls until that request completes.  Its `stall` output is the memory
// stall line the slowdown estimator samples.  `done_reqs` counts completed
// requests so a testbench can measure the core's real progress; `enable` low
// parks the core (no new request).
module core_model #(
  parameter int unsigned ID     = 0,
  parameter int unsigned N_APPS = 4,
  parameter int unsigned ADDR_W = 32
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      enable,
  input  int unsigned               think,
  output logic                      req_valid,
  output logic [ADDR_W-1:0]         req_addr,
  input  logic                      req_ready,
  input  logic                      resp_valid,
  input  logic [$clog2(N_APPS)-1:0] resp_app,
  output logic                      stall,
  output int unsigned               done_reqs
);
  typedef enum logic [1:0] {C_THINK, C_REQ, C_WAIT} cstate_e;
  cstate_e st;
  int unsigned cnt;
  assign stall = (st != C_THINK);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= C_THINK; cnt <= 0; req_valid <= 1'b0; req_addr <= '0; done_reqs <= 0;
    end else begin
      unique case (st)
        C_THINK: if (cnt >= think) begin
          if (enable) begin
            cnt <= 0; st <= C_REQ; req_valid <= 1'b1;
            req_addr <= ADDR_W'({ID[7:0], 24'($urandom)});
          end
        end else cnt <= cnt + 1;
        C_REQ: if (req_ready) begin req_valid <= 1'b0; st <= C_WAIT; end
        C_WAIT: if (resp_valid && resp_app == ($clog2(N_APPS))'(ID)) begin
          st <= C_THINK; done_reqs <= done_reqs + 1;
        end
        default: st <= C_THINK;
      endcase
    end
  end
endmodule
