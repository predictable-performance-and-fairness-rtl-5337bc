// mem_channel_model: behavioural stand-in for the DRAM command scheduler and
// devices behind the slowdown-estimation logic.  It takes one request at a
// time (mem_ready high when idle), holds it for LAT cycles and then signals
// its completion with a one-cycle resp_valid carrying the owner's index.  No
// banks, rows or timing parameters are modelled: only the serialisation of
// requests on one channel, which is what creates inter-application
// interference.
module mem_channel_model #(
  parameter int unsigned N_APPS = 4,
  parameter int unsigned LAT    = 10
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      mem_valid,
  output logic                      mem_ready,
  input  logic [$clog2(N_APPS)-1:0] mem_app,
  output logic                      resp_valid,
  output logic [$clog2(N_APPS)-1:0] resp_app
);
  int unsigned left;
  logic busy;
  assign mem_ready = !busy;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; left <= 0; resp_valid <= 1'b0; resp_app <= '0;
    end else begin
      resp_valid <= 1'b0;
      if (!busy && mem_valid) begin
        busy <= 1'b1; left <= LAT - 1; resp_app <= mem_app;
      end else if (busy) begin
        if (left == 0) begin busy <= 1'b0; resp_valid <= 1'b1; end
        else left <= left - 1;
      end
    end
  end
endmodule
