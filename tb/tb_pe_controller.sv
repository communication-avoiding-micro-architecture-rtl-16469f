// tb_pe_controller -- exercises the PE control logic inside a PE built with
// a tiny spectrum cache (4 packets) and a tiny score RAM (32 scores), as PE 1
// of 2.  Checks: the PE scores exactly the odd spectra (static
// interleaving) and leaves the other result records untouched; every
// result record is correct although the score RAM is drained many times
// per spectrum and the cache is refilled often; the number of DRAM writes
// is exactly one summary word plus ceil(count/16) score words per spectrum.
module tb_pe_controller;
  import xcorr_pkg::*;
  import xcorr_ref_pkg::*;
  import xcorr_workload_pkg::*;
  localparam int NSPEC = 9, NPEP = 3000;
  logic clk = 0, rst_n = 0;
  core_cfg_t cfg;
  logic start, done, bus_request, bus_grant;
  mem_req_t m_req;
  mem_rsp_t m_rsp;
  bcast_t bcast;
  int checks = 0, failures = 0, refills = 0, exp_writes = 0;

  processing_element #(.PE_ID(1), .NUM_PE(2), .CACHE_WORDS(4), .SCORE_WORDS(2)) dut (
    .clk, .rst_n, .cfg, .start, .done, .bus_request, .bus_grant, .m_req, .m_rsp, .bcast);
  dram_model #(.WORDS(16384), .LAT(2), .STALL_PCT(30)) u_mem (.clk, .rst_n, .req(m_req), .rsp(m_rsp));
  peptide_bcast_bus u_bc (.clk, .rst_n, .s_req(m_req), .s_rsp(m_rsp), .bcast);
  always #5 clk = ~clk;
  always @(posedge clk) bus_grant <= rst_n && bus_request && (bus_grant || $urandom_range(1) == 0);
  always @(posedge clk) if (dut.u_ctrl.refill_start) refills++;

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    build(NPEP, NSPEC, 300, 25, 25.0);
    foreach (img[a]) u_mem.mem[a] = img[a];
    for (int a = score_base; a < score_base + NSPEC * SCORE_STRIDE; a++) u_mem.mem[a] = '0;
    cfg = '{num_spectra: NSPEC, spec_base: SPEC_BASE, spec_stride: SPEC_STRIDE,
            pep_base: PEP_BASE, num_peptides: NPEP, tolerance: 32'(q16(25.0)),
            score_base: score_base, score_stride: SCORE_STRIDE};
    start = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    for (int a = score_base; a < score_base + NSPEC * SCORE_STRIDE; a++) out_img[a] = u_mem.mem[a];
    for (int s = 0; s < NSPEC; s++) begin
      if (s % 2 == 1) begin
        check_spectrum(s, checks, failures);
        exp_writes += 1 + ceil16(exp_count[s]);
        checks++;
        if (exp_count[s] <= 32) $display("note: spectrum %0d has only %0d candidates", s, exp_count[s]);
      end else begin
        checks++;
        for (int a = 0; a < SCORE_STRIDE; a++)
          if (out_img[score_base + s * SCORE_STRIDE + a] != '0) begin
            failures++;
            $display("FAIL PE 1 wrote result record of even spectrum %0d", s);
            break;
          end
      end
    end
    checks += 2;
    if (u_mem.writes != exp_writes) begin
      failures++;
      $display("FAIL dram writes %0d exp %0d", u_mem.writes, exp_writes);
    end
    if (refills < 5) begin failures++; $display("FAIL too few refills %0d", refills); end
    $display("refills=%0d writes=%0d", refills, u_mem.writes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
