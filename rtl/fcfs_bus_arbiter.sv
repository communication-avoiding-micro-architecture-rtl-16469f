// fcfs_bus_arbiter -- first-come first-serve arbiter between the processing
// elements and the shared memory bus.
//
// Every master i has a wait-count register.  While master i requests the bus
// and is not being served, its count rises by one per cycle (saturating), so
// a master that has been refused longer gains priority; a master that does
// not request has count 0.  Whenever the bus is free, the "find max"
// comparator tree picks the requesting master with the largest count
// (ties to the lowest index), its count is cleared and a one-hot grant is
// driven through a demultiplexer.  This is the structure of the paper's
// arbiter figure (wait-count registers, Find Max, DeMux driven by Sel).
//
// Own choices: the selected index is held in a register, so the grant stays
// with a master until it drops bus_request (it may issue several bus
// commands meanwhile); the bus can pass to the next master in the cycle the
// owner drops its request.  The find-max key is {request, count} so that an
// idle master never wins.  The granted master's command is routed to the
// memory side and the memory's response back to it; other masters see
// waitrequest high.  Read data is broadcast on every m_rsp port.
//
// Timing: request seen in cycle t -> bus_grant high from cycle t+1 (bus
// free).
module fcfs_bus_arbiter
  import xcorr_pkg::*;
#(
  parameter int unsigned N      = 16,
  parameter int unsigned WAIT_W = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic     [N-1:0]     bus_request,
  output logic     [N-1:0]     bus_grant,
  input  mem_req_t [N-1:0]     m_req,
  output mem_rsp_t [N-1:0]     m_rsp,
  output mem_req_t             s_req,
  input  mem_rsp_t             s_rsp
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;

  logic [N-1:0][WAIT_W-1:0] wait_cnt;
  logic [N-1:0][WAIT_W:0]   key;
  logic [IW-1:0]            max_idx;
  logic [WAIT_W:0]          max_val;
  logic                     owner_valid;
  logic [IW-1:0]            owner;
  logic                     bus_free;

  always_comb
    for (int unsigned i = 0; i < N; i++)
      key[i] = {bus_request[i], wait_cnt[i]};

  find_max #(.N(N), .W(WAIT_W + 1)) u_find_max (
    .vals(key), .max_idx(max_idx), .max_val(max_val)
  );

  // The bus is free when nobody owns it or the owner has let go.
  assign bus_free = !owner_valid || !bus_request[owner];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      owner_valid <= 1'b0;
      owner       <= '0;
      wait_cnt    <= '0;
    end else begin
      if (bus_free) begin
        owner_valid <= max_val[WAIT_W];        // some master requests
        owner       <= IW'(max_idx);
      end
      for (int unsigned i = 0; i < N; i++) begin
        if (!bus_request[i])
          wait_cnt[i] <= '0;
        else if (bus_free && max_val[WAIT_W] && IW'(max_idx) == IW'(i))
          wait_cnt[i] <= '0;                    // served now
        else if (!(owner_valid && owner == IW'(i)) && wait_cnt[i] != '1)
          wait_cnt[i] <= wait_cnt[i] + 1'b1;    // denied: priority rises
      end
    end
  end

  // Demultiplexer of a constant 1 under the select register.
  always_comb begin
    bus_grant = '0;
    if (owner_valid) bus_grant[owner] = 1'b1;
  end

  // Command and response routing.
  always_comb begin
    s_req = '0;
    if (owner_valid) s_req = m_req[owner];
    for (int unsigned i = 0; i < N; i++) begin
      m_rsp[i].readdata      = s_rsp.readdata;
      m_rsp[i].waitrequest   = bus_grant[i] ? s_rsp.waitrequest : 1'b1;
      m_rsp[i].readdatavalid = bus_grant[i] & s_rsp.readdatavalid;
    end
  end


  a_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(bus_grant));
  a_grant_req: assert property (@(posedge clk) disable iff (!rst_n)
                                (bus_grant & ~bus_request) == '0 || bus_free);

endmodule
