// tb_binary_search -- a mass-sorted database of random peptides in a DRAM
// model; for random precursor masses and the paper's six tolerance windows
// (1.5 to 50 Da) the module must report the first candidate and the count
// found by a linear scan, and push exactly those records, in order, into
// the peptide FIFO (drained at a random rate).  Broadcast records of the
// peptide being waited for are injected at random and must be taken.
module tb_binary_search;
  import xcorr_pkg::*;
  import xcorr_ref_pkg::*;
  localparam int NPEP = 400, PEP_BASE = 1000;
  logic clk = 0, rst_n = 0;
  logic start, bus_request, bus_grant, out_valid, out_ready, done, snoop_take;
  logic [MASS_W-1:0] prec_mass;
  logic [31:0] tolerance, first_idx, count;
  mem_req_t m_req;
  mem_rsp_t m_rsp;
  bcast_t bcast;
  peptide_t out_data, fifo_out;
  logic fifo_valid, fifo_pop;
  logic [3:0] fifo_count;
  longint masses [NPEP];
  int checks = 0, failures = 0, snoops = 0;

  binary_search dut (.clk, .rst_n, .start, .prec_mass, .tolerance, .pep_base(32'(PEP_BASE)),
    .num_peptides(32'(NPEP)), .bus_request, .bus_grant, .m_req, .m_rsp, .bcast,
    .out_valid, .out_ready, .out_data, .done, .first_idx, .count, .snoop_take);
  sync_fifo #(.W(PEP_W), .DEPTH(8)) u_fifo (.clk, .rst_n, .flush(1'b0), .in_valid(out_valid),
    .in_ready(out_ready), .in_data(out_data), .out_valid(fifo_valid), .out_ready(fifo_pop),
    .out_data(fifo_out), .count(fifo_count));
  dram_model #(.WORDS(2048), .LAT(3), .STALL_PCT(20)) u_mem (.clk, .rst_n, .req(m_req), .rsp(m_rsp));
  always #5 clk = ~clk;
  always @(posedge clk) bus_grant <= rst_n && bus_request && $urandom_range(3) != 0;
  always @(posedge clk) if (snoop_take) snoops++;

  // broadcast injection: sometimes another PE "reads" the record we need
  always @(posedge clk) begin
    bcast <= '0;
    if (rst_n && $urandom_range(9) == 0 && dut.idx < NPEP) begin
      bcast.valid   <= 1'b1;
      bcast.address <= PEP_BASE + dut.idx;
      bcast.data    <= u_mem.mem[PEP_BASE + dut.idx];
    end
  end

  task automatic check(bit c, string what);
    checks++;
    if (!c) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    peptide_t db [NPEP];
    peptide_t tmp;
    int res[];
    int ef, ec, got, cyc;
    real tols [6] = '{1.5, 3.0, 5.0, 10.0, 25.0, 50.0};
    longint lo, hi, pm;
    start = 0; prec_mass = 0; tolerance = 0; fifo_pop = 0;
    // database, sorted by mass (insertion sort)
    for (int i = 0; i < NPEP; i++) begin
      rand_residues($urandom_range(12, 6), res);
      db[i] = make_pep(res.size(), res);
      for (int j = i; j > 0 && db[j].mass < db[j-1].mass; j--) begin
        tmp = db[j]; db[j] = db[j-1]; db[j-1] = tmp;
      end
    end
    for (int i = 0; i < NPEP; i++) begin
      u_mem.mem[PEP_BASE + i] = BUS_DW'(db[i]);
      masses[i] = longint'(db[i].mass);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int s = 0; s < 60; s++) begin
      pm = masses[$urandom_range(NPEP - 1)] + longint'($urandom_range(400000)) - 200000;
      if (s == 0) pm = 100 * 65536;            // below every peptide
      if (s == 1) pm = 5000 * 65536;           // above every peptide
      @(negedge clk);
      prec_mass = MASS_W'(pm);
      tolerance = 32'(q16(tols[s % 6]));
      lo = pm - longint'(tolerance);
      hi = pm + longint'(tolerance);
      ef = NPEP;
      for (int i = NPEP - 1; i >= 0; i--) if (masses[i] >= lo) ef = i;
      ec = 0;
      for (int i = ef; i < NPEP && masses[i] <= hi; i++) ec++;
      start = 1;
      @(negedge clk);
      start = 0;
      got = 0;
      cyc = 0;
      while (!(done && !fifo_valid) && cyc < 100000) begin
        fifo_pop = $urandom_range(2) == 0;
        #1;
        if (fifo_valid && fifo_pop) begin
          check(got < ec && fifo_out == db[ef + got], "candidate record and order");
          got++;
        end
        @(negedge clk);
        cyc++;
      end
      fifo_pop = 0;
      check(done, "done");
      check(first_idx == 32'(ef), "first index");
      check(count == 32'(ec) && got == ec, "candidate count");
    end
    check(snoops > 20, "broadcast records taken");
    $display("snoops=%0d dram reads=%0d", snoops, u_mem.reads);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
