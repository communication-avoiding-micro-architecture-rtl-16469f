// bus_port_mux -- shares a PE's single memory-bus master port between its
// internal bus clients (the PE controller and the binary-search module).
//
// A client holds c_request for the whole of a bus session.  When the port is
// free, the lowest-numbered requesting client becomes owner; ownership ends
// when the owner drops its request.  The upstream request is the owner's
// request, so it falls for at least one cycle between two sessions and the
// system arbiter can pass the bus on.  The owner's command goes upstream;
// the upstream response goes to the owner, others see waitrequest high.
// This helper is this design's own; the paper shows both units on the
// memory bus without saying how they share it.
module bus_port_mux
  import xcorr_pkg::*;
#(
  parameter int unsigned N = 2
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic     [N-1:0] c_request,
  output logic     [N-1:0] c_grant,
  input  mem_req_t [N-1:0] c_req,
  output mem_rsp_t [N-1:0] c_rsp,
  output logic             up_request,
  input  logic             up_grant,
  output mem_req_t         up_req,
  input  mem_rsp_t         up_rsp
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;

  logic          own_valid;
  logic [IW-1:0] own, first;
  logic          free;

  always_comb begin
    first = '0;
    for (int i = N - 1; i >= 0; i--)
      if (c_request[i]) first = IW'(i);
  end

  assign free = !own_valid || !c_request[own];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      own_valid <= 1'b0;
      own       <= '0;
    end else if (free) begin
      own_valid <= |c_request;
      own       <= first;
    end
  end

  assign up_request = own_valid && c_request[own];

  always_comb begin
    up_req = own_valid ? c_req[own] : '0;
    for (int unsigned i = 0; i < N; i++) begin
      c_grant[i]             = own_valid && own == IW'(i) && up_grant;
      c_rsp[i].readdata      = up_rsp.readdata;
      c_rsp[i].waitrequest   = c_grant[i] ? up_rsp.waitrequest : 1'b1;
      c_rsp[i].readdatavalid = c_grant[i] && up_rsp.readdatavalid;
    end
  end
endmodule
