// tb_fcfs_bus_arbiter -- sixteen masters request the bus at random times,
// each doing 1-3 reads through a DRAM model once granted.  Checks: at most
// one grant; a grant goes only to a requester; each new grant goes to the
// master that started requesting earliest (lowest index among equals), i.e.
// first come first served; the bus is handed over one cycle after release;
// commands and read data are routed to and from the owner only.
module tb_fcfs_bus_arbiter;
  import xcorr_pkg::*;
  localparam int unsigned N = 16;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] bus_request, bus_grant, prev_grant;
  mem_req_t [N-1:0] m_req;
  mem_rsp_t [N-1:0] m_rsp;
  mem_req_t s_req;
  mem_rsp_t s_rsp;
  int checks = 0, failures = 0, cycle = 0, grants = 0, contended = 0;
  int req_start [N];

  fcfs_bus_arbiter #(.N(N)) dut (.clk, .rst_n, .bus_request, .bus_grant, .m_req, .m_rsp, .s_req, .s_rsp);
  dram_model #(.WORDS(4096), .LAT(2), .STALL_PCT(25)) u_mem (.clk, .rst_n, .req(s_req), .rsp(s_rsp));
  always #5 clk = ~clk;

  task automatic check(bit c, string what);
    checks++;
    if (!c) begin
      failures++;
      if (failures < 10) $display("FAIL %s cycle %0d", what, cycle);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) cycle <= cycle + 1;

  // grant checks, sampled just after each edge
  always @(posedge clk) if (rst_n) begin
    #1;
    check($onehot0(bus_grant), "one-hot");
    for (int g = 0; g < N; g++) if (bus_grant[g] && !prev_grant[g]) begin
      int others;
      grants++;
      others = 0;
      check(bus_request[g], "grant to requester");
      for (int j = 0; j < N; j++)
        if (j != g && bus_request[j] && req_start[j] < cycle) begin
          others++;
          check(req_start[g] < req_start[j] || (req_start[g] == req_start[j] && g < j), "FCFS order");
        end
      if (others > 0) contended++;
    end
    // handover: bus never idle while someone waits and nobody owns it
    if (bus_grant == '0 && prev_grant == '0)
      for (int j = 0; j < N; j++)
        if (bus_request[j] && req_start[j] < cycle - 1) check(0, "idle bus with waiting master");
    prev_grant = bus_grant;
  end

  for (genvar i = 0; i < N; i++) begin : g_m
    initial begin
      bus_request[i] = 0;
      m_req[i] = '0;
      req_start[i] = 0;
      @(posedge rst_n);
      for (int s = 0; s < 40; s++) begin
        repeat ($urandom_range(30)) @(negedge clk);
        bus_request[i] = 1;
        req_start[i] = cycle;
        do @(negedge clk); while (!bus_grant[i]);
        for (int k = 0; k < $urandom_range(3, 1); k++) begin
          m_req[i].read = 1;
          m_req[i].address = 32'(i * 256 + k);
          do @(posedge clk); while (m_rsp[i].waitrequest);
          @(negedge clk);
          m_req[i].read = 0;
          while (!m_rsp[i].readdatavalid) @(negedge clk);
          check(m_rsp[i].readdata == {16{32'(i * 256 + k)}}, "read data");
        end
        bus_request[i] = 0;
        @(negedge clk);
      end
    end
  end

  // routing: command on the memory side is the owner's
  always @(negedge clk) if (rst_n) begin
    for (int j = 0; j < N; j++) if (bus_grant[j] && s_req.read)
      check(s_req.address[31:8] == 24'(j), "command routing");
    for (int j = 0; j < N; j++) if (!bus_grant[j] && m_rsp[j].readdatavalid)
      check(0, "response to non-owner");
  end

  initial begin
    prev_grant = '0;
    for (int a = 0; a < 4096; a++) u_mem.mem[a] = {16{32'(a)}};
    repeat (3) @(posedge clk);
    rst_n = 1;
  end

  // end when all masters are done
  initial begin
    @(posedge rst_n);
    repeat (100) @(posedge clk);
    while (bus_request != '0 || grants < N * 40) @(posedge clk);
    repeat (10) @(posedge clk);
    check(contended > 50, "contention exercised");
    $display("grants=%0d contended=%0d", grants, contended);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
