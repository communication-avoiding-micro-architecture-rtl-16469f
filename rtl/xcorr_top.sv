// xcorr_top -- FPGA-side Xcorr scoring accelerator.
//
// NUM_PE processing elements score experimental spectra against a
// mass-sorted peptide database held in DRAM.  The host programs the core
// control registers through the csr_* slave port (in the full system this
// port sits behind the PCIe bridge) and starts a run; every PE then reads
// its spectra, finds and pre-fetches their candidate peptides, computes the
// Xcorr dot products and writes the scores back to DRAM.  All PEs share one
// memory master port through the FCFS bus arbiter; every word read from
// DRAM is also broadcast to all PEs (peptide broadcast bus).  The memory
// port mem_req/mem_rsp stands for the system interconnect and the DDR4
// memory interface, which are vendor IP and not part of this RTL.
//
// The structure (host registers, PEs, FCFS arbiter, shared memory bus)
// follows the paper's system figure; NUM_PE = 16 is the paper's final
// configuration.  There is no interrupt: the host polls STATUS.
module xcorr_top
  import xcorr_pkg::*;
#(
  parameter int unsigned NUM_PE      = 16,
  parameter int unsigned CACHE_WORDS = 32,
  parameter int unsigned SCORE_WORDS = 16,
  parameter int unsigned FIFO_DEPTH  = 8,
  parameter int unsigned WAIT_W      = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  // host register port
  input  logic [3:0]  csr_address,
  input  logic        csr_write,
  input  logic [31:0] csr_writedata,
  input  logic        csr_read,
  output logic [31:0] csr_readdata,
  output logic        csr_readdatavalid,
  // memory master port
  output mem_req_t    mem_req,
  input  mem_rsp_t    mem_rsp
);
  core_cfg_t             cfg;
  logic                  start;
  logic     [NUM_PE-1:0] pe_done, bus_request, bus_grant;
  mem_req_t [NUM_PE-1:0] m_req;
  mem_rsp_t [NUM_PE-1:0] m_rsp;
  bcast_t                bcast;

  core_regs #(.NUM_PE(NUM_PE)) u_regs (
    .clk, .rst_n, .csr_address, .csr_write, .csr_writedata, .csr_read,
    .csr_readdata, .csr_readdatavalid, .cfg, .start, .pe_done
  );

  for (genvar p = 0; p < NUM_PE; p++) begin : g_pe
    processing_element #(
      .PE_ID(p), .NUM_PE(NUM_PE), .CACHE_WORDS(CACHE_WORDS),
      .SCORE_WORDS(SCORE_WORDS), .FIFO_DEPTH(FIFO_DEPTH)
    ) u_pe (
      .clk, .rst_n, .cfg, .start, .done(pe_done[p]),
      .bus_request(bus_request[p]), .bus_grant(bus_grant[p]),
      .m_req(m_req[p]), .m_rsp(m_rsp[p]), .bcast
    );
  end

  fcfs_bus_arbiter #(.N(NUM_PE), .WAIT_W(WAIT_W)) u_arb (
    .clk, .rst_n, .bus_request, .bus_grant, .m_req, .m_rsp,
    .s_req(mem_req), .s_rsp(mem_rsp)
  );

  peptide_bcast_bus u_bcast (
    .clk, .rst_n, .s_req(mem_req), .s_rsp(mem_rsp), .bcast
  );
endmodule
