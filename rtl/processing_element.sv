// processing_element -- one Xcorr processing element (PE).
//
// Datapath, in the order the data flows:
//   binary_search  -> sync_fifo (peptide FIFO) -> ion_generator
//   ion_generator (32-bit ions) + spectrum_cache (512-bit packets)
//                  -> ion_matching_kernel -> score_ram -> DRAM
// with pe_controller in charge of the sequence and of DRAM traffic for the
// spectrum and the scores.  The controller and the binary search share the
// PE's one bus master port through bus_port_mux (controller first).  This
// is the organisation of the paper's PE figure; the FIFO depth, cache and
// score-RAM sizes are parameters.
//
// Ports: cfg/start from the core registers, done when all spectra of this
// PE are scored; bus_request/bus_grant and m_req/m_rsp to the system bus
// arbiter; bcast, the peptide broadcast from the memory side.
//
// The status outputs k_busy, g_busy, fifo_count, snoop_take and
// refill_start of the sub-blocks are wired to named signals but drive no
// logic here; they are kept as observation points for monitoring (lint
// lists them as unused).
module processing_element
  import xcorr_pkg::*;
#(
  parameter int unsigned PE_ID       = 0,
  parameter int unsigned NUM_PE      = 16,
  parameter int unsigned CACHE_WORDS = 32,
  parameter int unsigned SCORE_WORDS = 16,
  parameter int unsigned FIFO_DEPTH  = 8
) (
  input  logic      clk,
  input  logic      rst_n,
  input  core_cfg_t cfg,
  input  logic      start,
  output logic      done,
  output logic      bus_request,
  input  logic      bus_grant,
  output mem_req_t  m_req,
  input  mem_rsp_t  m_rsp,
  input  bcast_t    bcast
);
  // bus clients: 0 controller, 1 binary search
  logic     [1:0] c_request, c_grant;
  mem_req_t [1:0] c_req;
  mem_rsp_t [1:0] c_rsp;

  // cache
  logic                           invalidate, fill_we, set_base, cache_miss;
  logic [$clog2(CACHE_WORDS)-1:0] fill_addr;
  logic [BUS_DW-1:0]              fill_data, rd_data;
  logic [PKT_W-1:0]               base_out, miss_idx, rd_idx;
  logic                           rd_req, rd_valid;
  // kernel
  logic                           new_spec, score_valid, score_ready, k_busy;
  logic [PKT_W:0]                 npkt;
  logic [31:0]                    score;
  // binary search and FIFO
  logic                           bs_start, bs_done, snoop_take;
  logic [MASS_W-1:0]              prec_mass;
  logic [31:0]                    bs_first, bs_count;
  logic                           pf_valid, pf_ready, pep_valid, pep_ready;
  peptide_t                       pf_data, pep;
  logic [$clog2(FIFO_DEPTH):0]    fifo_count;
  // ion generator
  logic                           ion_valid, ion_ready, g_busy;
  theo_ion_t                      ion;
  // score RAM
  logic                           sram_we;
  logic [$clog2(SCORE_WORDS)+3:0] sram_wr_idx;
  logic [31:0]                    sram_wr_score;
  logic [$clog2(SCORE_WORDS)-1:0] sram_rd_addr;
  logic [BUS_DW-1:0]              sram_rd_data;
  logic                           refill_start;

  bus_port_mux #(.N(2)) u_port (
    .clk, .rst_n,
    .c_request, .c_grant, .c_req, .c_rsp,
    .up_request(bus_request), .up_grant(bus_grant), .up_req(m_req), .up_rsp(m_rsp)
  );

  pe_controller #(
    .PE_ID(PE_ID), .NUM_PE(NUM_PE), .CACHE_WORDS(CACHE_WORDS), .SCORE_WORDS(SCORE_WORDS)
  ) u_ctrl (
    .clk, .rst_n, .cfg, .start, .done,
    .bus_request(c_request[0]), .bus_grant(c_grant[0]), .m_req(c_req[0]), .m_rsp(c_rsp[0]),
    .invalidate, .fill_we, .fill_addr, .fill_data, .set_base, .base_out,
    .cache_miss, .miss_idx,
    .new_spec, .npkt, .score_valid, .score_ready, .score,
    .bs_start, .prec_mass, .bs_done, .bs_first, .bs_count,
    .sram_we, .sram_wr_idx, .sram_wr_score, .sram_rd_addr, .sram_rd_data,
    .refill_start
  );

  binary_search u_bs (
    .clk, .rst_n, .start(bs_start), .prec_mass, .tolerance(cfg.tolerance),
    .pep_base(cfg.pep_base), .num_peptides(cfg.num_peptides),
    .bus_request(c_request[1]), .bus_grant(c_grant[1]), .m_req(c_req[1]), .m_rsp(c_rsp[1]),
    .bcast,
    .out_valid(pf_valid), .out_ready(pf_ready), .out_data(pf_data),
    .done(bs_done), .first_idx(bs_first), .count(bs_count), .snoop_take
  );

  sync_fifo #(.W(PEP_W), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n, .flush(1'b0),
    .in_valid(pf_valid), .in_ready(pf_ready), .in_data(pf_data),
    .out_valid(pep_valid), .out_ready(pep_ready), .out_data(pep),
    .count(fifo_count)
  );

  ion_generator u_gen (
    .clk, .rst_n, .pep_valid, .pep_ready, .pep,
    .ion_valid, .ion_ready, .ion, .busy(g_busy)
  );

  spectrum_cache #(.CACHE_WORDS(CACHE_WORDS)) u_cache (
    .clk, .rst_n, .invalidate, .fill_we, .fill_addr, .fill_data,
    .set_base, .base_in(base_out),
    .rd_req, .rd_idx, .rd_valid, .rd_data, .miss(cache_miss), .miss_idx
  );

  ion_matching_kernel u_kernel (
    .clk, .rst_n, .npkt, .new_spec,
    .ion_valid, .ion_ready, .ion,
    .rd_req, .rd_idx, .rd_valid, .rd_data,
    .score_valid, .score_ready, .score, .busy(k_busy)
  );

  score_ram #(.WORDS(SCORE_WORDS)) u_sram (
    .clk, .we(sram_we), .wr_idx(sram_wr_idx), .wr_score(sram_wr_score),
    .rd_addr(sram_rd_addr), .rd_data(sram_rd_data)
  );
endmodule
