// tb_xcorr_design_space -- the cache-size and PE-count exploration, scaled
// down.  Seven configurations of the accelerator run the same workload side
// by side, each with its own memory model:
//   16 PEs with 512 B, 1 kB, 2 kB and 4 kB spectrum caches (CACHE_WORDS 8,
//   16, 32, 64), and 1, 6 and 31 PEs with the 2 kB cache.
// The workload is 64 spectra of 250..500 peaks (16..32 packets) against
// 3,000 mass-sorted peptides with a +-10 Da window, spectra in random
// precursor order.  A 2 kB cache holds every spectrum whole; smaller caches
// hold only part of each and refill whenever a peptide's ions reach past
// the cached packets.
//
// For every configuration the testbench checks every result record against
// the double-precision reference and prints the run's cycles, DRAM reads
// and writes, cache refills and the waiting time: the summed cycles in
// which a PE requests the bus while another PE holds it.  It also checks
// the trends that follow from the design: a 512 B cache needs more DRAM
// reads than a 2 kB cache and refills more often than a 1 kB cache, 2 kB
// and 4 kB caches need no refills at all for this workload, one PE never
// waits for the bus, and 16 PEs finish before one.
module tb_xcorr_design_space;
  import xcorr_pkg::*;
  import xcorr_ref_pkg::*;
  import xcorr_workload_pkg::*;
  localparam int NCFG = 7, NSPEC = 64, NPEP = 3000;
  localparam real TOL = 10.0;
  localparam int CFG_PE [NCFG] = '{16, 16, 16, 16, 1, 6, 31};
  localparam int CFG_CW [NCFG] = '{8, 16, 32, 64, 32, 32, 32};
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  bit built = 1'b0;
  bit      run_done [NCFG];
  int      run_cycles [NCFG], run_reads [NCFG], run_writes [NCFG];
  longint  wait_cyc [NCFG];
  int      refills [NCFG];
  logic [BUS_DW-1:0] results [NCFG][int];

  always #5 clk = ~clk;

  for (genvar c = 0; c < NCFG; c++) begin : g_cfg
    localparam int NPE = CFG_PE[c];
    logic [3:0] csr_address;
    logic csr_write, csr_read, csr_readdatavalid;
    logic [31:0] csr_writedata, csr_readdata;
    mem_req_t mem_req;
    mem_rsp_t mem_rsp;

    xcorr_top #(.NUM_PE(NPE), .CACHE_WORDS(CFG_CW[c])) dut (.clk, .rst_n, .csr_address,
      .csr_write, .csr_writedata, .csr_read, .csr_readdata, .csr_readdatavalid,
      .mem_req, .mem_rsp);
    dram_model #(.WORDS(32768), .LAT(4), .STALL_PCT(10)) u_mem (.clk, .rst_n, .req(mem_req),
      .rsp(mem_rsp));

    initial begin
      wait_cyc[c] = 0;
      refills[c]  = 0;
    end
    always @(posedge clk) if (rst_n && !run_done[c])
      if (dut.bus_grant != '0)
        wait_cyc[c] += longint'($countones(dut.bus_request & ~dut.bus_grant));
    for (genvar p = 0; p < NPE; p++) begin : g_pe_cnt
      always @(posedge clk) if (rst_n && dut.g_pe[p].u_pe.u_ctrl.refill_start) refills[c]++;
    end

    task automatic csr_wr(int a, logic [31:0] d);
      @(negedge clk);
      csr_address = 4'(a); csr_writedata = d; csr_write = 1;
      @(negedge clk);
      csr_write = 0;
    endtask

    task automatic csr_rd(int a, output logic [31:0] d);
      @(negedge clk);
      csr_address = 4'(a); csr_read = 1;
      @(negedge clk);
      csr_read = 0;
      d = csr_readdata;
    endtask

    initial begin
      logic [31:0] st, cyc;
      run_done[c] = 1'b0;
      csr_address = 0; csr_write = 0; csr_read = 0; csr_writedata = 0;
      wait (built);
      foreach (img[a]) u_mem.mem[a] = img[a];
      wait (rst_n);
      csr_wr(2, NSPEC);
      csr_wr(3, SPEC_BASE);
      csr_wr(4, SPEC_STRIDE);
      csr_wr(5, PEP_BASE);
      csr_wr(6, NPEP);
      csr_wr(7, 32'(q16(TOL)));
      csr_wr(8, score_base);
      csr_wr(9, SCORE_STRIDE);
      csr_wr(0, 1);
      do begin
        repeat (200) @(negedge clk);
        csr_rd(1, st);
      end while (st[1] == 1'b0);
      csr_rd(11, cyc);
      run_cycles[c] = int'(cyc);
      run_reads[c]  = u_mem.reads;
      run_writes[c] = u_mem.writes;
      for (int a = score_base; a < score_base + NSPEC * SCORE_STRIDE; a++) results[c][a] = u_mem.mem[a];
      run_done[c] = 1'b1;
    end
  end

  task automatic expect_true(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int tot;
    build(NPEP, NSPEC, 500, 12, TOL, 250);
    built = 1'b1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < NCFG; c++) wait (run_done[c]);
    tot = 0;
    foreach (exp_count[s]) tot += exp_count[s];
    $display("workload: %0d spectra, %0d peptides, +-%0.1f Da, %0d dot products", NSPEC, NPEP, TOL, tot);
    for (int c = 0; c < NCFG; c++) begin
      out_img = results[c];
      for (int s = 0; s < NSPEC; s++) check_spectrum(s, checks, failures);
      $display("%2d PEs, cache %4d B: %7d cycles, %6d DRAM reads, %5d writes, %5d refills, %8d wait cycles (%0.1f per PE)",
               CFG_PE[c], CFG_CW[c] * 64, run_cycles[c], run_reads[c], run_writes[c], refills[c],
               wait_cyc[c], real'(wait_cyc[c]) / real'(CFG_PE[c]));
    end
    expect_true(run_reads[0] > run_reads[2], "512 B cache should need more DRAM reads than 2 kB");
    expect_true(refills[0] > refills[1], "a 1 kB cache should refill less often than a 512 B cache");
    expect_true(refills[2] == 0 && refills[3] == 0, "2 kB and 4 kB caches should hold every spectrum whole");
    expect_true(wait_cyc[4] == 0, "a single PE should never wait for the bus");
    expect_true(run_cycles[4] > run_cycles[2], "16 PEs should finish before 1 PE");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
