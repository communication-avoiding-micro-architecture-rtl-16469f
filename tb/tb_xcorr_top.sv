// tb_xcorr_top -- end-to-end run of the accelerator at its default sizes
// (16 PEs, 2 kB spectrum caches, 8-entry peptide FIFOs, 1 kB score RAMs).
//
// The host side is played through the register port: parameters are
// written, the run is started and STATUS is polled until done.  48 spectra
// (3 per PE, 300..1400 peaks) are scored against 6000 mass-sorted peptides
// with a +-50 Da precursor window (hundreds of candidates per spectrum).
// Every result record is compared with the double-precision reference.
// Each mechanism of the design is counted and must occur at least once:
// bus contention resolved by the FCFS arbiter, cache refills of spectra
// larger than the cache, score-RAM drains in mid-spectrum, peptide records
// taken from the broadcast bus, FIFO back-pressure on the pre-fetcher and
// packet advances of the ion-matching kernel.
module tb_xcorr_top;
  import xcorr_pkg::*;
  import xcorr_ref_pkg::*;
  import xcorr_workload_pkg::*;
  localparam int NPE = 16, NSPEC = 48, NPEP = 6000;
  localparam real TOL = 50.0;
  logic clk = 0, rst_n = 0;
  logic [3:0] csr_address;
  logic csr_write, csr_read, csr_readdatavalid;
  logic [31:0] csr_writedata, csr_readdata;
  mem_req_t mem_req;
  mem_rsp_t mem_rsp;
  int checks = 0, failures = 0;
  int n_contend = 0, n_refill = 0, n_drain = 0, n_snoop = 0, n_fifo_full = 0, n_advance = 0;

  xcorr_top dut (.clk, .rst_n, .csr_address, .csr_write, .csr_writedata, .csr_read,
    .csr_readdata, .csr_readdatavalid, .mem_req, .mem_rsp);
  dram_model #(.WORDS(32768), .LAT(4), .STALL_PCT(10)) u_mem (.clk, .rst_n, .req(mem_req), .rsp(mem_rsp));
  always #5 clk = ~clk;

  // mechanism counters
  always @(posedge clk) if (rst_n && $countones(dut.bus_request & ~dut.bus_grant) > 0 && dut.bus_grant != '0)
    n_contend++;
  for (genvar p = 0; p < NPE; p++) begin : g_cnt
    always @(posedge clk) if (rst_n) begin
      if (dut.g_pe[p].u_pe.u_ctrl.refill_start) n_refill++;
      if (dut.g_pe[p].u_pe.u_ctrl.state == dut.g_pe[p].u_pe.u_ctrl.S_FL_END &&
          !dut.g_pe[p].u_pe.u_ctrl.final_flush) n_drain++;
      if (dut.g_pe[p].u_pe.u_bs.snoop_take) n_snoop++;
      if (dut.g_pe[p].u_pe.u_bs.state == dut.g_pe[p].u_pe.u_bs.S_PF_WAIT &&
          !dut.g_pe[p].u_pe.pf_ready) n_fifo_full++;
      if (dut.g_pe[p].u_pe.u_kernel.state == dut.g_pe[p].u_pe.u_kernel.S_RUN &&
          dut.g_pe[p].u_pe.ion_valid && dut.g_pe[p].u_pe.u_kernel.advance) n_advance++;
    end
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

  task automatic need(int n, string what);
    checks++;
    if (n == 0) begin
      failures++;
      $display("FAIL mechanism never happened: %s", what);
    end
  endtask

  initial begin
    repeat (5000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] st, cyc;
    csr_address = 0; csr_write = 0; csr_read = 0; csr_writedata = 0;
    build(NPEP, NSPEC, 1400, 12, TOL, 300);
    foreach (img[a]) u_mem.mem[a] = img[a];
    repeat (3) @(posedge clk);
    rst_n = 1;
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
    for (int a = score_base; a < score_base + NSPEC * SCORE_STRIDE; a++) out_img[a] = u_mem.mem[a];
    for (int s = 0; s < NSPEC; s++) check_spectrum(s, checks, failures);
    begin
      int tot;
      tot = 0;
      foreach (exp_count[s]) tot += exp_count[s];
      $display("run: %0d cycles, %0d spectra, %0d dot products, dram reads %0d writes %0d",
               cyc, NSPEC, tot, u_mem.reads, u_mem.writes);
    end
    $display("mechanisms: contention=%0d refill=%0d drain=%0d broadcast=%0d fifo_full=%0d advance=%0d",
             n_contend, n_refill, n_drain, n_snoop, n_fifo_full, n_advance);
    need(n_contend, "bus contention");
    need(n_refill, "spectrum cache refill");
    need(n_drain, "score RAM drain in mid-spectrum");
    need(n_snoop, "peptide taken from broadcast");
    need(n_fifo_full, "peptide FIFO full");
    need(n_advance, "kernel packet advance");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
