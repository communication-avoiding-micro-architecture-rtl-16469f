// pe_controller -- control logic of one processing element.
//
// The PE scores the spectra PE_ID, PE_ID+NUM_PE, PE_ID+2*NUM_PE, ... of the
// run, one at a time, each against all of its candidate peptides.  For
// each spectrum the controller
//   1. reads the spectrum header (precursor mass, packet count) and the
//      first min(npkt, CACHE_WORDS) packets into the spectrum cache in one
//      bus session;
//   2. starts the binary search (which then pre-fetches candidates through
//      the peptide FIFO to the ion generator and the ion-matching kernel);
//   3. while scoring, refills the cache from DRAM whenever the kernel asks
//      for a packet outside the cached window (spectra longer than the
//      cache), and writes each arriving score into the score RAM;
//   4. copies the score RAM to DRAM whenever it is full and when the last
//      candidate has been scored, then writes a summary word
//      {count, first_idx} at the start of the spectrum's result record.
// Result record of spectrum s at score_base + s*score_stride: word 0
// summary, words 1.. scores, 16 fp32 scores per word, lane 0 lowest.
//
// The paper states the controller's duties (copy the spectrum into on-chip
// RAM, run the computation, collect the scores in on-chip RAM, request the
// bus again and copy them to DRAM); the static assignment of spectra to PEs,
// the record layouts, the session structure and the refill policy are this
// design's own.  Each bus session holds bus_request from request to its
// last transfer and drops it for at least one cycle afterwards.
module pe_controller
  import xcorr_pkg::*;
#(
  parameter int unsigned PE_ID       = 0,
  parameter int unsigned NUM_PE      = 16,
  parameter int unsigned CACHE_WORDS = 32,
  parameter int unsigned SCORE_WORDS = 16
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  core_cfg_t                      cfg,
  input  logic                           start,
  output logic                           done,
  // bus client
  output logic                           bus_request,
  input  logic                           bus_grant,
  output mem_req_t                       m_req,
  input  mem_rsp_t                       m_rsp,
  // spectrum cache
  output logic                           invalidate,
  output logic                           fill_we,
  output logic [$clog2(CACHE_WORDS)-1:0] fill_addr,
  output logic [BUS_DW-1:0]              fill_data,
  output logic                           set_base,
  output logic [PKT_W-1:0]               base_out,
  input  logic                           cache_miss,
  input  logic [PKT_W-1:0]               miss_idx,
  // ion-matching kernel
  output logic                           new_spec,
  output logic [PKT_W:0]                 npkt,
  input  logic                           score_valid,
  output logic                           score_ready,
  input  logic [31:0]                    score,
  // binary search
  output logic                           bs_start,
  output logic [MASS_W-1:0]              prec_mass,
  input  logic                           bs_done,
  input  logic [31:0]                    bs_first,
  input  logic [31:0]                    bs_count,
  // score RAM
  output logic                           sram_we,
  output logic [$clog2(SCORE_WORDS)+3:0] sram_wr_idx,
  output logic [31:0]                    sram_wr_score,
  output logic [$clog2(SCORE_WORDS)-1:0] sram_rd_addr,
  input  logic [BUS_DW-1:0]              sram_rd_data,
  // activity, for statistics
  output logic                           refill_start
);
  localparam int unsigned CA  = $clog2(CACHE_WORDS);
  localparam int unsigned SA  = $clog2(SCORE_WORDS);
  localparam int unsigned CAP = SCORE_WORDS * 16;

  typedef enum logic [3:0] {
    S_IDLE, S_NEXT, S_LD_REQ, S_LD_CMD, S_LD_DATA, S_LD_END, S_RUN,
    S_FL_REQ, S_FL_RD, S_FL_WR, S_FL_END, S_SUM_REQ, S_SUM_WR, S_SUM_END
  } state_t;

  state_t          state;
  logic [31:0]     spec, spec_addr, res_addr, ld_addr, fl_words, total;
  logic            ld_hdr, first_load, final_flush;
  logic [PKT_W:0]  ld_n, ld_word;
  logic [PKT_W-1:0] ld_base;
  logic [SA+4:0]   sc_idx;
  logic [SA:0]     fl_k;
  logic [SA+1:0]   nwords;
  spec_hdr_t       hdr;
  result_hdr_t     summary;
  logic            finished;

  assign hdr      = m_rsp.readdata[$bits(spec_hdr_t)-1:0];
  assign nwords   = (SA+2)'((sc_idx + (SA+5)'(15)) >> 4);
  assign finished = bs_done && total == bs_count && !score_valid;
  assign summary  = '{count: total, first_idx: bs_first};

  // ------------------------------------------------------------ outputs
  assign bus_request = state inside {S_LD_REQ, S_LD_CMD, S_LD_DATA,
                                     S_FL_REQ, S_FL_RD, S_FL_WR, S_SUM_REQ, S_SUM_WR};
  always_comb begin
    m_req = '0;
    case (state)
      S_LD_CMD: begin
        m_req.read    = 1'b1;
        m_req.address = ld_addr;
      end
      S_FL_WR: begin
        m_req.write     = 1'b1;
        m_req.address   = res_addr + 32'd1 + fl_words + 32'(fl_k);
        m_req.writedata = sram_rd_data;
      end
      S_SUM_WR: begin
        m_req.write     = 1'b1;
        m_req.address   = res_addr;
        m_req.writedata = BUS_DW'(summary);
      end
      default: ;
    endcase
  end

  assign fill_we    = (state == S_LD_DATA) && m_rsp.readdatavalid && !ld_hdr;
  assign fill_addr  = ld_word[CA-1:0];
  assign fill_data  = m_rsp.readdata;
  assign set_base   = (state == S_LD_END);
  assign base_out   = ld_base;
  assign new_spec   = (state == S_LD_END) && first_load;
  assign bs_start   = (state == S_LD_END) && first_load;
  assign invalidate = (state == S_NEXT) || (state == S_RUN && cache_miss);
  assign refill_start = (state == S_RUN && cache_miss);

  assign score_ready   = (state == S_RUN) && !cache_miss && (32'(sc_idx) < CAP);
  assign sram_we       = score_valid && score_ready;
  assign sram_wr_idx   = sc_idx[SA+3:0];
  assign sram_wr_score = score;
  assign sram_rd_addr  = fl_k[SA-1:0];

  function automatic logic [PKT_W:0] min_words(logic [PKT_W:0] a);
    return (a > (PKT_W+1)'(CACHE_WORDS)) ? (PKT_W+1)'(CACHE_WORDS) : a;
  endfunction

  // -------------------------------------------------------------- FSM
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      done        <= 1'b0;
      spec        <= '0;
      spec_addr   <= '0;
      res_addr    <= '0;
      ld_addr     <= '0;
      ld_hdr      <= 1'b0;
      ld_n        <= '0;
      ld_word     <= '0;
      ld_base     <= '0;
      first_load  <= 1'b0;
      final_flush <= 1'b0;
      npkt        <= '0;
      prec_mass   <= '0;
      sc_idx      <= '0;
      total       <= '0;
      fl_words    <= '0;
      fl_k        <= '0;
    end else if (start) begin
      done  <= 1'b0;
      spec  <= PE_ID;
      state <= S_NEXT;
    end else begin
      case (state)
        S_IDLE: ;
        S_NEXT: begin
          if (spec >= cfg.num_spectra) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            spec_addr  <= cfg.spec_base + spec * cfg.spec_stride;
            res_addr   <= cfg.score_base + spec * cfg.score_stride;
            ld_addr    <= cfg.spec_base + spec * cfg.spec_stride;
            ld_hdr     <= 1'b1;
            ld_base    <= '0;
            first_load <= 1'b1;
            state      <= S_LD_REQ;
          end
        end
        S_LD_REQ: if (bus_grant) state <= S_LD_CMD;
        S_LD_CMD: if (!m_rsp.waitrequest) state <= S_LD_DATA;
        S_LD_DATA: if (m_rsp.readdatavalid) begin
          ld_addr <= ld_addr + 1'b1;
          if (ld_hdr) begin
            ld_hdr    <= 1'b0;
            npkt      <= hdr.npkt;
            prec_mass <= hdr.prec_mass;
            ld_n      <= min_words(hdr.npkt);
            ld_word   <= '0;
            state     <= (hdr.npkt == '0) ? S_LD_END : S_LD_CMD;
          end else begin
            ld_word <= ld_word + 1'b1;
            state   <= (ld_word + 1'b1 == ld_n) ? S_LD_END : S_LD_CMD;
          end
        end
        S_LD_END: begin
          if (first_load) begin
            sc_idx   <= '0;
            total    <= '0;
            fl_words <= '0;
          end
          first_load <= 1'b0;
          state      <= S_RUN;
        end
        S_RUN: begin
          if (cache_miss) begin
            ld_base <= miss_idx;
            ld_addr <= spec_addr + 32'd1 + 32'(miss_idx);
            ld_n    <= min_words(npkt - (PKT_W+1)'(miss_idx));
            ld_word <= '0;
            ld_hdr  <= 1'b0;
            state   <= S_LD_REQ;
          end else if (score_valid && score_ready) begin
            sc_idx <= sc_idx + 1'b1;
            total  <= total + 1'b1;
            if (32'(sc_idx) + 1 == CAP) begin
              final_flush <= 1'b0;
              state       <= S_FL_REQ;
            end
          end else if (finished) begin
            final_flush <= 1'b1;
            state       <= (sc_idx != '0) ? S_FL_REQ : S_SUM_REQ;
          end
        end
        S_FL_REQ: if (bus_grant) begin
          fl_k  <= '0;
          state <= S_FL_RD;
        end
        S_FL_RD: state <= S_FL_WR;               // score RAM read latency
        S_FL_WR: if (!m_rsp.waitrequest) begin
          if ((SA+2)'(fl_k) + 1'b1 == nwords) state <= S_FL_END;
          else begin
            fl_k  <= fl_k + 1'b1;
            state <= S_FL_RD;
          end
        end
        S_FL_END: begin
          fl_words <= fl_words + 32'(nwords);
          sc_idx   <= '0;
          state    <= final_flush ? S_SUM_REQ : S_RUN;
        end
        S_SUM_REQ: if (bus_grant) state <= S_SUM_WR;
        S_SUM_WR:  if (!m_rsp.waitrequest) state <= S_SUM_END;
        S_SUM_END: begin
          spec  <= spec + NUM_PE;
          state <= S_NEXT;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_no_rw_without_grant: assert property (@(posedge clk) disable iff (!rst_n)
                                          (m_req.read || m_req.write) |-> bus_grant);
endmodule
