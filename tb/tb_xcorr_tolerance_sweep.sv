// tb_xcorr_tolerance_sweep -- the run-time-versus-precursor-window
// experiment, scaled down: the accelerator at its default sizes (16 PEs,
// 2 kB caches) scores the same kind of workload with windows of +-1.5, 3,
// 5, 10, 25 and 50 Da, one run per window, restarted through the register
// port without a reset in between.
//
// The full experiment scores 90,494 spectra against 669,964 peptides; here
// each run scores 64 spectra of 100..500 peaks against a fresh database of
// 6,000 mass-sorted peptides.  The spectra are made from consecutive
// database peptides, i.e. they arrive in ascending precursor order as a host
// that sorts its spectra would send them, so PEs working at the same time
// need mostly the same candidates and the peptide broadcast can serve one
// DRAM read to several PEs.  Every result record is checked against the
// double-precision reference.  Per window the testbench prints the number
// of dot products, the cycles of the run (CYCLES register), cycles per dot
// product, DRAM reads per dot product and peptide records taken from the
// broadcast; it fails if the broadcast is never used.
module tb_xcorr_tolerance_sweep;
  import xcorr_pkg::*;
  import xcorr_ref_pkg::*;
  import xcorr_workload_pkg::*;
  localparam int NPE = 16, NSPEC = 64, NPEP = 6000, NTOL = 6;
  localparam real TOLS [NTOL] = '{1.5, 3.0, 5.0, 10.0, 25.0, 50.0};
  logic clk = 0, rst_n = 0;
  logic [3:0] csr_address;
  logic csr_write, csr_read, csr_readdatavalid;
  logic [31:0] csr_writedata, csr_readdata;
  mem_req_t mem_req;
  mem_rsp_t mem_rsp;
  int checks = 0, failures = 0;
  int n_snoop = 0;

  xcorr_top dut (.clk, .rst_n, .csr_address, .csr_write, .csr_writedata, .csr_read,
    .csr_readdata, .csr_readdatavalid, .mem_req, .mem_rsp);
  dram_model #(.WORDS(32768), .LAT(4), .STALL_PCT(10)) u_mem (.clk, .rst_n, .req(mem_req), .rsp(mem_rsp));
  always #5 clk = ~clk;

  for (genvar p = 0; p < NPE; p++) begin : g_cnt
    always @(posedge clk) if (rst_n && dut.g_pe[p].u_pe.u_bs.snoop_take) n_snoop++;
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
    repeat (6000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] st, cyc;
    int tot, rd0, sn0, total_snoop;
    csr_address = 0; csr_write = 0; csr_read = 0; csr_writedata = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    total_snoop = 0;
    for (int t = 0; t < NTOL; t++) begin
      build(NPEP, NSPEC, 500, 12, TOLS[t], 100, 1'b1);
      tot = 0;
      foreach (exp_count[s]) begin
        tot += exp_count[s];
        checks++;
        if (exp_count[s] > (SCORE_STRIDE - 1) * 16) begin
          failures++;
          $display("FAIL workload: spectrum %0d has %0d candidates, more than a result record holds",
                   s, exp_count[s]);
        end
      end
      foreach (img[a]) u_mem.mem[a] = img[a];
      rd0 = u_mem.reads;
      sn0 = n_snoop;
      csr_wr(2, NSPEC);
      csr_wr(3, SPEC_BASE);
      csr_wr(4, SPEC_STRIDE);
      csr_wr(5, PEP_BASE);
      csr_wr(6, NPEP);
      csr_wr(7, 32'(q16(TOLS[t])));
      csr_wr(8, score_base);
      csr_wr(9, SCORE_STRIDE);
      csr_wr(0, 1);
      do begin
        repeat (200) @(negedge clk);
        csr_rd(1, st);
      end while (st[1] == 1'b0);
      csr_rd(11, cyc);
      out_img.delete();
      for (int a = score_base; a < score_base + NSPEC * SCORE_STRIDE; a++) out_img[a] = u_mem.mem[a];
      for (int s = 0; s < NSPEC; s++) check_spectrum(s, checks, failures);
      total_snoop += n_snoop - sn0;
      $display("window +-%4.1f Da: %6d dot products, %8d cycles, %6.2f cycles/dot, %5.2f DRAM reads/dot, %5d broadcast takes",
               TOLS[t], tot, cyc, real'(cyc) / real'(tot > 0 ? tot : 1),
               real'(u_mem.reads - rd0) / real'(tot > 0 ? tot : 1), n_snoop - sn0);
    end
    checks++;
    if (total_snoop == 0) begin
      failures++;
      $display("FAIL mechanism never happened: peptide taken from broadcast");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
