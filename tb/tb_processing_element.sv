// tb_processing_element -- one PE at its default sizes (2 kB spectrum
// cache, 8-entry peptide FIFO, 1 kB score RAM) scores a workload of spectra
// against a peptide database held in a DRAM model, with a bus that grants
// after a random delay.  Every result record (first candidate, candidate
// count, every score) is compared with the reference.  Spectra of up to
// 1400 peaks overflow the 512-peak cache, so cache refills occur.
module tb_processing_element;
  import xcorr_pkg::*;
  import xcorr_ref_pkg::*;
  import xcorr_workload_pkg::*;
  localparam int NSPEC = 12, NPEP = 1500;
  logic clk = 0, rst_n = 0;
  core_cfg_t cfg;
  logic start, done, bus_request, bus_grant;
  mem_req_t m_req;
  mem_rsp_t m_rsp;
  bcast_t bcast;
  int checks = 0, failures = 0, refills = 0, cycles = 0;

  processing_element #(.PE_ID(0), .NUM_PE(1)) dut (.clk, .rst_n, .cfg, .start, .done,
    .bus_request, .bus_grant, .m_req, .m_rsp, .bcast);
  dram_model #(.WORDS(16384), .LAT(4), .STALL_PCT(20)) u_mem (.clk, .rst_n, .req(m_req), .rsp(m_rsp));
  peptide_bcast_bus u_bc (.clk, .rst_n, .s_req(m_req), .s_rsp(m_rsp), .bcast);
  always #5 clk = ~clk;
  always @(posedge clk) bus_grant <= rst_n && bus_request && (bus_grant || $urandom_range(3) == 0);
  always @(posedge clk) if (dut.u_ctrl.refill_start) refills++;

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    build(NPEP, NSPEC, 1400, 25, 10.0);
    foreach (img[a]) u_mem.mem[a] = img[a];
    cfg = '{num_spectra: NSPEC, spec_base: SPEC_BASE, spec_stride: SPEC_STRIDE,
            pep_base: PEP_BASE, num_peptides: NPEP, tolerance: 32'(q16(10.0)),
            score_base: score_base, score_stride: SCORE_STRIDE};
    start = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    while (!done) begin @(negedge clk); cycles++; end
    for (int a = score_base; a < score_base + NSPEC * SCORE_STRIDE; a++) out_img[a] = u_mem.mem[a];
    for (int s = 0; s < NSPEC; s++) check_spectrum(s, checks, failures);
    checks++;
    if (refills == 0) begin failures++; $display("FAIL no cache refill happened"); end
    $display("cycles=%0d refills=%0d dram reads=%0d writes=%0d", cycles, refills, u_mem.reads, u_mem.writes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
